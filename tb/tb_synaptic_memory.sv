// tb_synaptic_memory -- fills all 2048 word lines with address-dependent
// 2048-bit words, reads them back in random order with back-to-back requests
// and checks the data, the latency and the rate of one word line every
// MEM_CYCLE cycles (256 synapses per 100 MHz memory cycle).
module tb_synaptic_memory;
  import spinaps_pkg::*;
  localparam int DW = 2048, NRD = 2000;
  logic clk = 0, rst_n = 0, req = 0, we = 0;
  logic [10:0] addr; logic [DW-1:0] wdata, rdata; logic ready, rvalid;
  int checks = 0, failures = 0;
  int q[$];
  longint t0, t1;
  synaptic_memory dut (.*);
  always #1 clk = ~clk;
  longint cyc = 0;
  always @(posedge clk) cyc++;
  function automatic logic [DW-1:0] pat(int a);
    logic [DW-1:0] d;
    for (int i = 0; i < DW / 32; i++) d[i*32 +: 32] = 32'(a) * 32'h9E3779B1 ^ (32'(i) * 32'h85EBCA6B + 32'h1234567);
    return d;
  endfunction
  initial begin
    repeat (300000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(posedge clk) if (rvalid) begin
    int a;
    checks++;
    a = q.pop_front();
    if (rdata !== pat(a)) begin failures++; if (failures < 5) $display("line %0d wrong", a); end
  end
  initial begin
    addr = '0; wdata = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int a = 0; a < 2048; a++) begin
      while (!ready) @(negedge clk);
      req = 1; we = 1; addr = 11'(a); wdata = pat(a); @(negedge clk); req = 0; we = 0;
    end
    while (!ready) @(negedge clk);
    t0 = cyc;
    for (int i = 0; i < NRD; i++) begin
      int a;
      a = $urandom % 2048;
      while (!ready) @(negedge clk);
      req = 1; addr = 11'(a); q.push_back(a); @(negedge clk); req = 0;
    end
    while (q.size() != 0) @(negedge clk);
    t1 = cyc;
    // NRD reads back to back: (NRD-1)*MEM_CYCLE cycles between first and last
    // request plus READ_LAT for the last data.
    checks++;
    if (t1 - t0 != longint'((NRD - 1) * MEM_CYCLE + READ_LAT + 1)) begin
      failures++; $display("took %0d cycles", t1 - t0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
