// tb_clipper -- checks clipping of 18-bit potentials to the S IIII FFF code
// over edge values and random values.
module tb_clipper;
  import spinaps_pkg::*;
  logic signed [17:0] u; clipped_t x; logic clipped;
  int checks = 0, failures = 0;
  clipper dut (.*);
  task automatic chk(int v);
    int m; logic [7:0] e;
    u = 18'(v); #1;
    m = (v < 0) ? -v : v;
    e = {(v < 0) ? 1'b1 : 1'b0, (m > 64) ? 7'd64 : 7'(m)};
    checks++;
    if (x !== e || clipped !== (m > 64)) begin failures++; $display("u=%0d x=%h exp %h", v, x, e); end
  endtask
  initial begin
    #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    chk(0); chk(1); chk(-1); chk(63); chk(64); chk(65); chk(-64); chk(-65);
    chk(131071); chk(-131072); chk(12); chk(-12);
    for (int i = 0; i < 2000; i++) chk(($urandom % 400) - 200);
    for (int i = 0; i < 500; i++) chk($signed(18'($urandom)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
