// tb_core_controller -- checks the sequencing of the core controller with a
// model of its surroundings: an address store that yields 0..2 addresses per
// scanned neuron, a memory with the core's busy time and latency, and a
// first spike at a chosen step (or none).  Per step it checks that the
// input handshake happens once, every neuron is scanned once in order with
// window select t-1, the bias line is read first, every address is read and
// added once, reads are at least MEM_CYCLE apart, the evaluation runs
// PASSES passes in order, and that the sample ends at the spiking step (or
// after T steps without a decision).
module tb_core_controller;
  import spinaps_pkg::*;
  localparam int NXT = 8, TT = 4, TAUT = 3, PS = 4, AW = 11;
  logic clk = 0, rst_n = 0, start = 0, in_valid = 0;
  logic busy, done, decided, in_ready, inreg_clear, inreg_shift;
  logic [2:0] decision_t, step_t;
  logic [1:0] win_sel; logic [2:0] scan_idx; logic pat_valid, pat_ready;
  logic as_valid, as_flip, as_busy, as_pop; logic [AW-1:0] as_addr;
  logic mem_ready, mem_rvalid, mem_req; logic [AW-1:0] mem_addr;
  logic acc_clr, acc_add, acc_flip, eval_en, lfsr_en, any_spike, bias_read;
  logic [1:0] eval_pass;
  int checks = 0, failures = 0;

  core_controller #(.N_IN(NXT), .T(TT), .WIN(TAUT), .PASSES(PS), .AW(AW)) dut (.*);
  always #1 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ---- address store model ----
  logic [AW-1:0] aq[$];
  assign as_valid  = aq.size() != 0;
  assign as_addr   = as_valid ? aq[0] : '0;
  assign as_flip   = as_addr[0];
  assign as_busy   = as_valid;
  always @(negedge clk) pat_ready <= ($urandom % 4) != 0;

  // ---- memory model ----
  int busy_cnt = 0, lat = 0, last_issue = -100, cyc = 0;
  assign mem_ready = (busy_cnt == 0);
  assign mem_rvalid = (lat == 1);

  // ---- bookkeeping ----
  int exp_reads, got_reads, got_adds, scan_next, passes, n_in, n_clr, d;
  logic [AW-1:0] issued[$];
  bit first_read;

  always @(posedge clk) begin
    cyc++;
    if (mem_req) begin
      busy_cnt <= MEM_CYCLE - 1; lat <= READ_LAT;
    end else begin
      if (busy_cnt != 0) busy_cnt <= busy_cnt - 1;
      if (lat != 0) lat <= lat - 1;
    end
    if (rst_n) begin
      if (pat_valid && pat_ready) begin
        int n;
        checks++; if (scan_idx != 3'(scan_next)) begin failures++; $display("scan %0d exp %0d", scan_idx, scan_next); end
        checks++; if (win_sel != 2'(step_t - 1)) begin failures++; $display("win_sel"); end
        scan_next++;
        n = $urandom % 3;
        for (int i = 0; i < n; i++) begin aq.push_back(AW'($urandom % (NXT * TAUT))); exp_reads++; end
      end
      if (mem_req) begin
        checks++; if (!mem_ready) begin failures++; $display("request while busy"); end
        checks++; if (cyc - last_issue < MEM_CYCLE) begin failures++; $display("reads too close"); end
        last_issue = cyc;
        if (first_read) begin
          checks++; if (mem_addr != AW'(NXT * TAUT)) begin failures++; $display("first read not bias"); end
          first_read = 0;
        end else begin
          checks++; if (mem_addr != aq[0]) begin failures++; $display("wrong address"); end
        end
        got_reads++;
      end
      if (as_pop) void'(aq.pop_front());
      if (acc_add) got_adds++;
      if (acc_clr) begin n_clr++; first_read = 1; scan_next = 0; exp_reads++; end
      if (eval_en) begin
        checks++; if (eval_pass != 2'(passes % PS)) begin failures++; $display("pass order"); end
        checks++; if (!lfsr_en) failures++;
        passes++;
      end
      if (in_ready && in_valid) n_in++;
    end
  end
  assign any_spike = (d != 0) && (step_t == 3'(d));

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int s = 0; s < 30; s++) begin
      int steps;
      d = $urandom % (TT + 1);   // 0: no spike at all
      exp_reads = 0; got_reads = 0; got_adds = 0; passes = 0; n_in = 0; n_clr = 0;
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      while (!done) begin
        in_valid = in_ready && ($urandom % 2);
        @(negedge clk);
      end
      in_valid = 0;
      steps = (d == 0) ? TT : d;
      checks++; if (n_in != steps || n_clr != steps) begin failures++; $display("steps %0d/%0d exp %0d", n_in, n_clr, steps); end
      checks++; if (got_reads != exp_reads || got_adds != exp_reads) begin failures++; $display("reads %0d adds %0d exp %0d", got_reads, got_adds, exp_reads); end
      checks++; if (passes != steps * PS) begin failures++; $display("passes %0d", passes); end
      checks++; if (decided != (d != 0) || (d != 0 && decision_t != 3'(d))) begin failures++; $display("decision %0d %0d exp %0d", decided, decision_t, d); end
      checks++; if (busy) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
