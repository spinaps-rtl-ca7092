// tb_spike_comparator -- checks the registered p > rnd decision, hold when
// disabled and clear, and that the spike rate over a sweep of random numbers
// equals p/256.
module tb_spike_comparator;
  logic clk = 0, rst_n = 0, clr = 0, en = 0; logic [7:0] p, rnd; logic spike;
  int checks = 0, failures = 0, cnt;
  spike_comparator dut (.*);
  always #1 clk = ~clk;
  initial begin
    repeat (300000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    p = 0; rnd = 0;
    @(negedge clk); rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      logic e;
      p = 8'($urandom); rnd = 8'($urandom); en = 1;
      @(negedge clk); e = p > rnd;
      checks++; if (spike !== e) failures++;
      en = 0; p = ~p; @(negedge clk);
      checks++; if (spike !== e) failures++;   // held
    end
    clr = 1; @(negedge clk); clr = 0; checks++; if (spike !== 0) failures++;
    // Rate: for p = 77 exactly 77 of the 256 random values give a spike.
    cnt = 0; p = 77;
    for (int r = 0; r < 256; r++) begin rnd = 8'(r); en = 1; @(negedge clk); cnt += spike; end
    checks++; if (cnt != 77) begin failures++; $display("rate %0d", cnt); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
