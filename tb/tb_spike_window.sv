// tb_spike_window -- exhaustive test of the spike window multiplexer against
// the worked example (t = 1 gives all zeros, t = 3 gives "s2 s1 00000") and
// against an independent model for every register value and select.
module tb_spike_window;
  localparam int T = 8, TAU = 7;
  logic [T-1:0] reg_bits; logic [2:0] sel; logic [TAU-1:0] pattern, expv;
  int checks = 0, failures = 0;
  spike_window #(.T(T), .TAU(TAU)) dut (.*);
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    // Worked example: s1 = 1, s2 = 0, s3 = 1 (after the shift of step 3).
    reg_bits = 8'b0000_0101; // bit0 = s3, bit1 = s2, bit2 = s1
    sel = 3'd0; #1; checks++; if (pattern !== 7'b0000000) failures++;
    sel = 3'd2; #1; checks++; if (pattern !== 7'b0100000) begin failures++; $display("ex %b", pattern); end
    // Exhaustive.
    for (int r = 0; r < 256; r++) for (int s = 0; s < 8; s++) begin
      reg_bits = 8'(r); sel = 3'(s); #1;
      expv = '0;
      for (int lag = 1; lag <= TAU; lag++) if (lag <= s) expv[TAU-lag] = reg_bits[lag];
      checks++; if (pattern !== expv) begin failures++; $display("r=%0d s=%0d %b exp %b", r, s, pattern, expv); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
