// tb_spinaps_core_b5 -- the end-to-end test of tb_spinaps_core run on a core
// built for 5-bit synapses (the lowest precision evaluated for this
// architecture: 1280-bit word lines, 64 x 2560 subarrays with 80-bit ports).
// With magnitudes of at most 15 the 18-bit potential cannot saturate, so
// that mechanism is not required here.  Otherwise identical:
//
// The testbench programs the synaptic memory through the write port, runs
// samples of random input spike trains and compares every result with a
// reference model written here from the network equations: for each step t
// it recomputes u_i = gamma_i + sum over inputs j and lags k <= min(t-1,tau)
// with s_{t-k,j} = 1 of the synapse (sign flipped for negative inputs,
// saturating at the 18-bit limits in the order the core adds), clips it to
// [-8, 8], applies the PWL sigmoid and draws each spike against its own model
// of the shared LFSR.  It checks the decided flag, class, step, the spike
// vector of the deciding step, the number of word lines read and a cycle
// budget per sample.  Two weight sets are used: random small synapses with
// negative biases (decisions at varying steps), and a stress set (large
// positive synapses, very negative biases) that drives saturation, clipping,
// address-store stalls, all-negative inputs without any decision and a tie
// of many neurons spiking at once.  Each such mechanism is counted; one that
// never happens counts as a failure.
module tb_spinaps_core_b5;
  import spinaps_pkg::*;
  localparam int WBT = 5;                       // synapse precision b
  localparam int MAXM = (1 << (WBT - 1)) - 1;   // largest magnitude
  localparam int NXT = 256, NYT = 256, TT = 8, TAUT = 7, DW = NYT * WBT;
  localparam int NLINES = NXT * TAUT + 1;

  logic clk = 0, rst_n = 0;
  logic wr_en = 0; logic [10:0] wr_addr = '0; logic [DW-1:0] wr_data = '0; logic wr_ready;
  logic start = 0; logic [NXT-1:0] in_sign = '0; logic in_valid = 0; logic [NXT-1:0] in_spikes = '0;
  logic in_ready, busy, done, decided; logic [7:0] decision_class; logic [3:0] decision_t;
  logic [NYT-1:0] out_spikes;
  logic [31:0] cnt_reads, cnt_stall, cnt_sat, cnt_clip, cnt_flip, cnt_zero_win;

  spinaps_core #(.WB_P(WBT)) dut (.*);

  always #1 clk = ~clk;
  longint cyc = 0;
  always @(posedge clk) cyc++;

  int checks = 0, failures = 0;
  int n_early = 0, n_nodec = 0, n_sat = 0, n_clip = 0, n_stall = 0, n_flip = 0, n_zero = 0, n_tie = 0, n_late = 0;

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ---------------- reference model state ----------------
  byte unsigned wmem [NLINES][NYT];   // synapses, sign-magnitude
  logic [15:0]  lfsr_m = 16'hACE1;

  function automatic int hash(int a, int b, int salt);
    int unsigned h;
    h = 32'(a) * 32'h9E3779B1 ^ 32'(b) * 32'h85EBCA6B ^ 32'(salt) * 32'hC2B2AE35;
    h ^= h >> 15; h *= 32'h2C1B3C6D; h ^= h >> 12;
    return int'(h & 32'h7FFFFFFF);
  endfunction

  function automatic int sval(byte unsigned w, bit flip);
    int m = w & MAXM;
    return ((w >> (WBT - 1)) ^ flip) ? -m : m;
  endfunction

  function automatic int pwl_ref(int u);
    int m, n, f, low, res;
    m = (u < 0) ? -u : u;
    if (m > 64) m = 64;
    n = m / 8; f = m % 8;
    low = (n >= 8) ? 0 : ((128 - 8 * f) >> n);
    if (u < 0) res = low;
    else begin res = 256 - low; if (res > 255) res = 255; end
    return res;
  endfunction

  task automatic load_weights(int set);
    for (int l = 0; l < NLINES; l++) begin
      for (int i = 0; i < NYT; i++) begin
        int h = hash(l, i, set);
        byte unsigned w;
        if (l == NLINES - 1) begin
          // biases
          w = 8'((1 << WBT) - 1);   // gamma = -MAXM/8 (-127/8 for b = 8: p = 0 at t = 1)
        end else if (set == 1) begin
          w = 8'(((h >> 8) % 2) << (WBT - 1) | (h % 8));
          if (i % 37 == (l / TAUT) % 37) w = 8'((h % 20) > MAXM ? MAXM : (h % 20));   // a few stronger positive links
        end else begin
          w = (i == 5) ? 8'(MAXM) : 8'(h % (MAXM + 1));
        end
        wmem[l][i] = w;
        wr_data[i*WBT +: WBT] = WBT'(w);
      end
      wr_addr = 11'(l); wr_en = 1;
      @(posedge clk); while (!wr_ready) @(posedge clk);
      #0.1 wr_en = 0;
      @(negedge clk);
    end
  endtask

  // Runs one sample, comparing with the reference model.
  task automatic run_sample(logic [NXT-1:0] sp [TT], logic [NXT-1:0] sg, string name);
    longint u [NYT];
    int exp_reads, e_class, e_t, p, rd0, ntie;
    bit e_dec, any;
    logic [NYT-1:0] e_spk;
    longint c0, c1;
    e_dec = 0; e_class = 0; e_t = 0; exp_reads = 0; e_spk = '0;
    // ---- reference ----
    for (int t = 1; t <= TT && !e_dec; t++) begin
      exp_reads++;                              // bias line
      for (int i = 0; i < NYT; i++) u[i] = sval(wmem[NLINES-1][i], 0);
      for (int j = 0; j < NXT; j++)
        for (int k = 1; k <= TAUT && k <= t - 1; k++)
          if (sp[t-k-1][j]) begin
            exp_reads++;
            for (int i = 0; i < NYT; i++) begin
              u[i] += sval(wmem[j*TAUT + k - 1][i], sg[j]);
              if (u[i] > 131071) u[i] = 131071;
              if (u[i] < -131072) u[i] = -131072;
            end
          end
      e_spk = '0;
      for (int pass = 0; pass < 16; pass++) begin
        for (int g = 0; g < NYT / 16; g++) begin
          int i = g * 16 + pass;
          p = pwl_ref(int'(u[i]));
          e_spk[i] = (p > int'(lfsr_m[7:0]));
        end
        lfsr_m = {lfsr_m[14:0], lfsr_m[15] ^ lfsr_m[13] ^ lfsr_m[12] ^ lfsr_m[10]};
      end
      if (e_spk != '0) begin
        e_dec = 1; e_t = t;
        for (int i = NYT - 1; i >= 0; i--) if (e_spk[i]) e_class = i;
      end
    end
    // ---- DUT ----
    rd0 = cnt_reads;
    c0 = cyc;
    @(negedge clk); in_sign = sg; start = 1; @(negedge clk); start = 0;
    for (int t = 0; t < TT; t++) begin
      while (!in_ready && !done) @(negedge clk);
      if (done) break;
      in_spikes = sp[t]; in_valid = 1; @(negedge clk); in_valid = 0;
    end
    while (!done) @(negedge clk);
    c1 = cyc;
    checks++;
    if (decided !== e_dec || (e_dec && (decision_class !== 8'(e_class) || decision_t !== 4'(e_t)))) begin
      failures++;
      $display("%s: decided %0d class %0d t %0d, expected %0d %0d %0d", name, decided, decision_class, decision_t, e_dec, e_class, e_t);
    end
    checks++;
    if (e_dec && out_spikes !== e_spk) begin failures++; $display("%s: spike vector differs", name); end
    checks++;
    if (int'(cnt_reads) - rd0 != exp_reads) begin failures++; $display("%s: reads %0d expected %0d", name, int'(cnt_reads) - rd0, exp_reads); end
    // Cycle budget: at least MEM_CYCLE per word line read (the memory rate);
    // at most that plus the neuron scan, 16 passes and a few cycles per step.
    checks++;
    if (c1 - c0 < longint'((exp_reads - 1) * MEM_CYCLE) ||
        c1 - c0 > longint'(exp_reads * MEM_CYCLE + (e_dec ? e_t : TT) * (NXT + 60) + 10)) begin
      failures++; $display("%s: %0d cycles for %0d reads", name, c1 - c0, exp_reads);
    end
    ntie = $countones(out_spikes);
    $display("%s: decided=%0d class=%0d t=%0d spikes=%0d reads=%0d cycles=%0d", name, decided, decision_class, decision_t, ntie, exp_reads, c1 - c0);
    if (decided && decision_t < 4'(TT)) n_early++;
    if (decided && decision_t > 4'd2) n_late++;
    if (!decided) n_nodec++;
    if (decided && ntie > 1) n_tie++;
  endtask

  logic [NXT-1:0] sp [TT];

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    @(negedge clk);
    load_weights(1);
    for (int s = 0; s < 8; s++) begin
      int rate;
      rate = 4 + 5 * s;   // percent
      for (int t = 0; t < TT; t++)
        for (int j = 0; j < NXT; j++) sp[t][j] = ($urandom % 100) < rate;
      in_sign = '0;
      for (int j = 0; j < NXT; j++) in_sign[j] = ($urandom % 4) == 0;
      run_sample(sp, in_sign, $sformatf("random%0d", s));
    end
    load_weights(2);
    for (int t = 0; t < TT; t++) sp[t] = '1;
    run_sample(sp, '1, "stress_negative");
    run_sample(sp, '0, "stress_positive");
    n_sat = cnt_sat; n_clip = cnt_clip; n_stall = cnt_stall; n_flip = cnt_flip; n_zero = cnt_zero_win;
    $display("mechanisms: early=%0d late=%0d no_decision=%0d tie=%0d saturate=%0d clip=%0d stall=%0d flip=%0d zero_window=%0d",
             n_early, n_late, n_nodec, n_tie, n_sat, n_clip, n_stall, n_flip, n_zero);
    checks++; if (n_early == 0) begin failures++; $display("no early decision"); end
    // Step 1 sees only the bias; a bias of -MAXM/8 drives p to 0 only when
    // MAXM/8 reaches the PWL zero region, i.e. for b = 8.
    if (WBT == 8) begin
      checks++; if (n_late  == 0) begin failures++; $display("no decision after step 2"); end
      checks++; if (n_nodec == 0) begin failures++; $display("no sample without decision"); end
    end
    checks++; if (n_tie   == 0) begin failures++; $display("no tie"); end
    // 1793 lines of magnitude MAXM exceed the 18-bit range only for b = 8.
    if (WBT == 8) begin checks++; if (n_sat == 0) begin failures++; $display("no saturation"); end end
    checks++; if (n_clip  == 0) begin failures++; $display("no clipping"); end
    checks++; if (n_stall == 0) begin failures++; $display("no stall"); end
    checks++; if (n_flip  == 0) begin failures++; $display("no sign flip"); end
    checks++; if (n_zero  == 0) begin failures++; $display("no all-zero window"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
