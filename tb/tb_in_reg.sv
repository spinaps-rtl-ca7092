// tb_in_reg -- self-checking test of in_reg: random spikes are shifted in
// for T steps with clears in between; the register content is compared with
// a reference history kept in the testbench.
module tb_in_reg;
  localparam int NX = 16, T = 8;
  logic clk = 0, rst_n = 0, clear = 0, shift = 0;
  logic [NX-1:0] spikes;
  logic [NX-1:0][T-1:0] q, ref_q;
  int checks = 0, failures = 0;
  in_reg #(.NX(NX), .T(T)) dut (.*);
  always #1 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    spikes = '0; ref_q = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int s = 0; s < 20; s++) begin
      @(negedge clk); clear = 1; @(negedge clk); clear = 0; ref_q = '0;
      for (int t = 0; t < T; t++) begin
        spikes = NX'($urandom); shift = ($urandom % 4) != 0;
        @(negedge clk);
        if (shift) for (int j = 0; j < NX; j++) ref_q[j] = {ref_q[j][T-2:0], spikes[j]};
        shift = 0;
        checks++; if (q !== ref_q) begin failures++; $display("mismatch %h %h", q, ref_q); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
