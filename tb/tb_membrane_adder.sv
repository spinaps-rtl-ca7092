// tb_membrane_adder -- random sequences of sign-magnitude synapses with and
// without sign flip are accumulated and compared with an integer reference,
// including saturation at the 18-bit limits.
module tb_membrane_adder;
  logic clk = 0, rst_n = 0, clr = 0, add = 0, flip = 0; logic [7:0] w;
  logic signed [17:0] u; logic sat;
  int checks = 0, failures = 0, nsat = 0;
  longint r;
  membrane_adder dut (.*);
  always #1 clk = ~clk;
  initial begin
    repeat (400000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    w = 0;
    @(negedge clk); rst_n = 1;
    for (int s = 0; s < 40; s++) begin
      clr = 1; @(negedge clk); clr = 0; r = 0;
      checks++; if (u !== 0) failures++;
      for (int i = 0; i < 3000; i++) begin
        int v; logic e_sat;
        w = 8'($urandom); add = ($urandom % 8) != 0; flip = $urandom % 2;
        // biased runs drive the sum into saturation
        if (s % 4 == 3) w[7] = 1'b0 ^ flip;
        if (s % 4 == 2) w[7] = 1'b1 ^ flip;
        v = w[6:0]; if (w[7] ^ flip) v = -v;
        @(negedge clk);
        e_sat = 0;
        if (add) begin
          r += v;
          if (r > 131071)  begin r = 131071;  e_sat = 1; end
          if (r < -131072) begin r = -131072; e_sat = 1; end
        end
        nsat += e_sat;
        checks++; if (u !== 18'(r) || sat !== e_sat) begin failures++; if (failures < 10) $display("u=%0d exp %0d", u, r); end
      end
    end
    checks++; if (nsat == 0) begin failures++; $display("no saturation exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
