// tb_stt_subarray -- writes random 128-bit groups to random (row, column
// group) positions of the subarray model and reads them back, checking the
// data against a reference copy, the read latency (READ_LAT cycles) and the
// busy time of reads (CYCLE) and writes (WCYCLE).
module tb_stt_subarray;
  import spinaps_pkg::*;
  localparam int ROWS = 64, COLS = 4096, IO = 128;
  logic clk = 0, rst_n = 0, req = 0, we = 0;
  logic [ROWS-1:0] wl; logic [4:0] col; logic [IO-1:0] wdata, rdata;
  logic ready, rvalid;
  logic [IO-1:0] refm [ROWS][32];
  logic          written [ROWS][32];
  int checks = 0, failures = 0;
  stt_subarray dut (.*);
  always #1 clk = ~clk;
  initial begin
    repeat (300000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic access(bit w, int r, int c, logic [IO-1:0] d);
    int busy;
    while (!ready) @(negedge clk);
    req = 1; we = w; wl = '0; wl[r] = 1'b1; col = 5'(c); wdata = d;
    @(negedge clk); req = 0; we = 0;
    busy = 1;
    while (!ready) begin @(negedge clk); busy++; end
    checks++; if (busy != (w ? WRITE_CYC : MEM_CYCLE)) begin failures++; $display("busy %0d", busy); end
  endtask
  initial begin
    for (int r = 0; r < ROWS; r++) for (int c = 0; c < 32; c++) written[r][c] = 0;
    wl = '0; col = '0; wdata = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 1500; i++) begin
      int r, c; logic [IO-1:0] d;
      r = $urandom % ROWS; c = $urandom % 32;
      d = {$urandom, $urandom, $urandom, $urandom};
      if (!written[r][c] || ($urandom % 2)) begin
        access(1, r, c, d); refm[r][c] = d; written[r][c] = 1;
      end else begin
        int lat;
        while (!ready) @(negedge clk);
        req = 1; wl = '0; wl[r] = 1'b1; col = 5'(c); @(negedge clk); req = 0; lat = 1;
        while (!rvalid) begin @(negedge clk); lat++; end
        checks++; if (lat != READ_LAT) begin failures++; $display("latency %0d", lat); end
        checks++; if (rdata !== refm[r][c]) begin failures++; $display("data r=%0d c=%0d", r, c); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
