// tb_lfsr16 -- checks the LFSR step by step against a reference model, its
// hold when disabled, that it never reaches zero and that its period is the
// maximal 65535.
module tb_lfsr16;
  logic clk = 0, rst_n = 0, en = 0; logic [15:0] state; logic [7:0] rnd;
  logic [15:0] r;
  int checks = 0, failures = 0, period;
  lfsr16 dut (.*);
  always #1 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    @(negedge clk); rst_n = 1;
    checks++; if (state != 16'hACE1) failures++;
    r = state;
    @(negedge clk); checks++; if (state != r) failures++;   // en = 0 holds
    en = 1;
    for (int i = 0; i < 100; i++) begin
      r = {r[14:0], r[15] ^ r[13] ^ r[12] ^ r[10]};
      @(negedge clk);
      checks++; if (state != r || rnd != r[7:0]) failures++;
    end
    period = 0;
    r = state;
    do begin @(negedge clk); period++; if (state == 0) failures++; end while (state != r && period < 70000);
    checks++; if (period != 65535) begin failures++; $display("period %0d", period); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
