// tb_addr_store -- random tau-bit patterns are fed for consecutive input
// neurons while the reader pops at random; every address that leaves must be
// the next one of an independent list (neuron*TAU + k - 1 for each set bit,
// earliest word line first) with the right sign flag.  The test also checks
// that a pattern is consumed at one address per cycle, that all-zero
// patterns take one cycle and that back-pressure (stall) happens.
module tb_addr_store;
  localparam int NX = 16, TAU = 7, DEPTH = 4, AW = 11;
  logic clk = 0, rst_n = 0, pat_valid = 0, flip = 0, rd_pop = 0;
  logic [TAU-1:0] pat; logic [3:0] neuron;
  logic pat_ready, rd_valid, rd_flip, busy, stall;
  logic [AW-1:0] rd_addr;
  int checks = 0, failures = 0, nstall = 0, sent = 0, got = 0;
  logic always_pop = 0;
  logic [AW:0] expq[$];
  addr_store #(.NX(NX), .TAU(TAU), .DEPTH(DEPTH), .AW(AW)) dut (.*);
  always #1 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  // reader
  always @(negedge clk) if (rst_n) begin
    if (stall) nstall++;
    rd_pop <= rd_valid && (always_pop || ($urandom % 3 == 0));
  end
  always @(posedge clk) if (rst_n && rd_valid && rd_pop) begin
    logic [AW:0] e;
    checks++;
    if (expq.size() == 0) begin failures++; $display("unexpected pop"); end
    else begin
      e = expq.pop_front();
      if ({rd_flip, rd_addr} !== e) begin failures++; $display("got %h exp %h", {rd_flip, rd_addr}, e); end
    end
    got++;
  end
  initial begin
    int cyc;
    pat = '0; neuron = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int rep = 0; rep < 200; rep++) begin
      for (int j = 0; j < NX; j++) begin
        pat = TAU'($urandom); if ($urandom % 4 == 0) pat = '0;
        neuron = 4'(j); flip = $urandom % 2; pat_valid = 1;
        for (int k = 1; k <= TAU; k++) if (pat[TAU-k]) begin expq.push_back({flip, AW'(j*TAU + k - 1)}); sent++; end
        cyc = 0;
        do begin @(posedge clk); cyc++; end while (!pat_ready);
        @(negedge clk);
      end
    end
    pat_valid = 0;
    // Throughput with the reader always popping: a 7-bit pattern needs 7 cycles.
    wait (!busy); @(negedge clk);
    always_pop = 1;
    pat = '1; neuron = 4'd3; pat_valid = 1; cyc = 0;
    for (int k = 1; k <= TAU; k++) begin expq.push_back({flip, AW'(3*TAU + k - 1)}); sent++; end
    @(posedge clk); @(negedge clk); pat_valid = 0;
    while (busy) begin @(negedge clk); cyc++; end
    checks++; if (cyc != TAU + 1) begin failures++; $display("7-bit pattern took %0d cycles", cyc); end
    always_pop = 0;
    checks++; if (sent != got || expq.size() != 0) begin failures++; $display("sent %0d got %0d", sent, got); end
    checks++; if (nstall == 0) begin failures++; $display("stall never happened"); end
    $display("stall cycles: %0d", nstall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
