// tb_pwl_sigmoid -- checks the PWL sigmoid against its defining formula
// worked out in real numbers for every input code, against a few hand
// values, and that it stays within 0.07 of the true logistic function.
module tb_pwl_sigmoid;
  import spinaps_pkg::*;
  clipped_t x; prob_t p;
  int checks = 0, failures = 0;
  pwl_sigmoid dut (.*);
  initial begin
    #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    real v, n, f, y, e, sg;
    int expi;
    // Hand values: x = 0 -> 128, x = -1 -> 64, x = -0.5 -> 96, x = +1 -> 192, x = 8 -> 255, x = -8 -> 0.
    x = 8'h00; #1; checks++; if (p != 128) failures++;
    x = 8'h88; #1; checks++; if (p != 64)  failures++;
    x = 8'h84; #1; checks++; if (p != 96)  failures++;
    x = 8'h08; #1; checks++; if (p != 192) failures++;
    x = 8'h40; #1; checks++; if (p != 255) failures++;
    x = 8'hC0; #1; checks++; if (p != 0)   failures++;
    for (int s = 0; s < 2; s++) for (int m = 0; m <= 64; m++) begin
      x = {s[0], 7'(m)}; #1;
      v = m / 8.0; n = $floor(v); f = v - n;
      y = (0.5 - f / 4.0) / (2.0 ** n);
      // negative side truncated to 1/256; positive side is its complement
      expi = int'($floor(y * 256.0 + 1e-9));
      if (s == 0) begin expi = 256 - expi; y = 1.0 - y; end
      if (expi > 255) expi = 255;
      checks++; if (p != 8'(expi)) begin failures++; $display("x=%h p=%0d exp %0d", x, p, expi); end
      sg = 1.0 / (1.0 + $exp(s ? v : -v));
      e = p / 256.0 - sg; if (e < 0) e = -e;
      checks++; if (e > 0.07) begin failures++; $display("x=%h far from sigmoid %f %f", x, p/256.0, sg); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
