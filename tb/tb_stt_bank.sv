// tb_stt_bank -- fills all 2048 addresses of a bank with address-dependent
// data and reads them back in random order, which checks the predecoder and
// the column groups (any decoding error aliases two addresses), plus the read
// latency.
module tb_stt_bank;
  import spinaps_pkg::*;
  localparam int DW = 512;
  logic clk = 0, rst_n = 0, req = 0, we = 0;
  logic [10:0] addr; logic [DW-1:0] wdata, rdata; logic ready, rvalid;
  int checks = 0, failures = 0;
  stt_bank dut (.*);
  always #1 clk = ~clk;
  function automatic logic [DW-1:0] pat(int a);
    logic [DW-1:0] d;
    for (int i = 0; i < DW / 32; i++) d[i*32 +: 32] = 32'(a) * 32'h9E3779B1 + 32'(i) * 32'h85EBCA6B;
    return d;
  endfunction
  initial begin
    repeat (200000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    addr = '0; wdata = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int a = 0; a < 2048; a++) begin
      while (!ready) @(negedge clk);
      req = 1; we = 1; addr = 11'(a); wdata = pat(a); @(negedge clk); req = 0; we = 0;
    end
    for (int i = 0; i < 3000; i++) begin
      int a, lat;
      a = $urandom % 2048;
      while (!ready) @(negedge clk);
      req = 1; addr = 11'(a); @(negedge clk); req = 0; lat = 1;
      while (!rvalid) begin @(negedge clk); lat++; end
      checks++; if (lat != READ_LAT) begin failures++; $display("lat %0d", lat); end
      checks++; if (rdata !== pat(a)) begin failures++; if (failures < 5) $display("addr %0d wrong", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
