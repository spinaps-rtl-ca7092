// spinaps_core -- one SpinAPS neuro-synaptic core (top level).
//
// The core evaluates a two-layer probabilistic spiking network of GLM
// neurons: NX input neurons, NY output neurons, synapses in a banked STT-RAM
// and digital neurons.  The membrane potential of output neuron i at step t
// is the bias gamma_i plus, for every input neuron j and lag k = 1..tau with
// an input spike at t-k, the synapse w[j][k][i].  A piecewise-linear sigmoid
// turns the potential into a spike probability and a comparison with a
// shared LFSR draws the spike.  With first-to-spike decoding the sample is
// classified by the first output neuron that spikes; the core stops there.
//
// Data path, per step: input spikes -> in_reg (T bits per input neuron) ->
// spike_window (tau-bit pattern, select t-1, shared by all inputs, walked
// neuron by neuron) -> addr_store (addresses of active word lines) ->
// synaptic_memory (2048 x 2048 bits, one word line per memory cycle) -> NY
// membrane_adders (sign flip for negative inputs) -> clipper + pwl_sigmoid
// (NY/PWL_SHARE generators, each serving PWL_SHARE neurons in turn) -> NY
// spike_comparators against lfsr16 -> first-to-spike decision.
// core_controller sequences all of it.
//
// Interface:
//   weight load : wr_en/wr_addr/wr_data, taken when wr_ready (core idle and
//                 memory ready).  Word line layout: see synaptic_memory.
//   sample      : pulse start with in_sign (1 = negative input, flips the
//                 sign of that neuron's synapses) while not busy; then give
//                 the spikes of steps 1, 2, ... with in_valid/in_ready.
//   result      : done rises when the sample ends; decided says whether an
//                 output neuron spiked, decision_class is the lowest-numbered
//                 spiking neuron, decision_t the step, out_spikes all spikes
//                 of that step (the spikes a mesh router would carry).
//   counters    : word lines read (synaptic operations, bias included),
//                 cycles the address store stalled, adder saturation cycles,
//                 clipped potentials, sign-flipped reads, all-zero windows.
// Synapse precision: WB_P = 8 is the baseline.  For b-bit synapses
// (b = 5..7 are the other precisions evaluated for this architecture) the
// word line shrinks to 256*b bits and each subarray to 64 x 512*b cells with
// a 16*b-bit port; the neuron logic (18-bit potential, 8-bit clipped value
// and probability) stays the same.
// Everything is synchronous to clk (500 MHz in the paper's design) with an
// asynchronous active-low reset.
module spinaps_core
  import spinaps_pkg::*;
#(
  parameter int unsigned NX_P   = NX,
  parameter int unsigned NY_P   = NY,
  parameter int unsigned T_P    = T_STEPS,
  parameter int unsigned TAU_P  = TAU,
  parameter int unsigned SHARE  = PWL_SHARE,
  parameter int unsigned AS_DEPTH = 8,
  parameter int unsigned WB_P   = WB,
  localparam int unsigned AW    = 11,
  localparam int unsigned DW    = NY_P * WB_P,
  localparam int unsigned SUB_IO = DW / 16,
  localparam int unsigned NG    = NY_P / SHARE,
  localparam int unsigned NW    = $clog2(NX_P),
  localparam int unsigned YW    = $clog2(NY_P),
  localparam int unsigned TW    = $clog2(T_P + 1),
  localparam int unsigned SW    = (T_P > 1) ? $clog2(T_P) : 1,
  localparam int unsigned PSW   = (SHARE > 1) ? $clog2(SHARE) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // synapse programming
  input  logic              wr_en,
  input  logic [AW-1:0]     wr_addr,
  input  logic [DW-1:0]     wr_data,
  output logic              wr_ready,
  // sample
  input  logic              start,
  input  logic [NX_P-1:0]   in_sign,
  input  logic              in_valid,
  input  logic [NX_P-1:0]   in_spikes,
  output logic              in_ready,
  output logic              busy,
  output logic              done,
  output logic              decided,
  output logic [YW-1:0]     decision_class,
  output logic [TW-1:0]     decision_t,
  output logic [NY_P-1:0]   out_spikes,
  // activity counters
  output logic [31:0]       cnt_reads,
  output logic [31:0]       cnt_stall,
  output logic [31:0]       cnt_sat,
  output logic [31:0]       cnt_clip,
  output logic [31:0]       cnt_flip,
  output logic [31:0]       cnt_zero_win
);
  // The memory has 2048 word lines of NY_P*WB_P bits, spread over 16
  // subarrays; the kernel and bias lines must fit.
  if (DW % 16 != 0 || NX_P * TAU_P + 1 > 2048) begin : g_size_err
    $error("spinaps_core: NY_P*WB_P must be a multiple of 16 and NX_P*TAU_P+1 <= 2048");
  end

  // ---------------- control ----------------
  logic           inreg_clear, inreg_shift, pat_valid, pat_ready;
  logic           as_valid, as_flip, as_busy, as_pop, as_stall;
  logic [AW-1:0]  as_addr, c_mem_addr;
  logic           c_mem_req, mem_ready, mem_rvalid;
  logic           acc_clr, acc_add, acc_flip, eval_en, lfsr_en, any_spike, bias_read;
  logic [SW-1:0]  win_sel;
  logic [NW-1:0]  scan_idx;
  logic [PSW-1:0] eval_pass;
  logic [TW-1:0]  step_t;

  core_controller #(.N_IN(NX_P), .T(T_P), .WIN(TAU_P), .PASSES(SHARE), .AW(AW)) u_ctrl (
    .clk, .rst_n, .start, .busy, .done, .decided, .decision_t,
    .in_valid, .in_ready, .inreg_clear, .inreg_shift,
    .win_sel, .scan_idx, .pat_valid, .pat_ready,
    .as_valid, .as_addr, .as_flip, .as_busy, .as_pop,
    .mem_ready, .mem_rvalid, .mem_req(c_mem_req), .mem_addr(c_mem_addr),
    .acc_clr, .acc_add, .acc_flip, .eval_en, .eval_pass, .lfsr_en, .any_spike,
    .step_t, .bias_read
  );

  // ---------------- input layer ----------------
  logic [NX_P-1:0]          sign_q;
  logic [NX_P-1:0][T_P-1:0] inreg_q;
  logic [TAU_P-1:0]         pattern;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)           sign_q <= '0;
    else if (inreg_clear) sign_q <= in_sign;
  end

  in_reg #(.NX(NX_P), .T(T_P)) u_inreg (
    .clk, .rst_n, .clear(inreg_clear), .shift(inreg_shift), .spikes(in_spikes), .q(inreg_q)
  );

  spike_window #(.T(T_P), .TAU(TAU_P)) u_win (
    .reg_bits(inreg_q[scan_idx]), .sel(win_sel), .pattern
  );

  addr_store #(.NX(NX_P), .TAU(TAU_P), .DEPTH(AS_DEPTH), .AW(AW)) u_as (
    .clk, .rst_n, .pat_valid, .pat(pattern), .neuron(scan_idx), .flip(sign_q[scan_idx]),
    .pat_ready, .rd_valid(as_valid), .rd_addr(as_addr), .rd_flip(as_flip),
    .rd_pop(as_pop), .busy(as_busy), .stall(as_stall)
  );

  // ---------------- synaptic memory ----------------
  logic          mem_req, mem_we;
  logic [AW-1:0] mem_addr;
  logic [DW-1:0] mem_rdata;

  assign wr_ready = !busy && mem_ready && !start;
  assign mem_we   = wr_en && wr_ready;
  assign mem_req  = c_mem_req || mem_we;
  assign mem_addr = mem_we ? wr_addr : c_mem_addr;

  synaptic_memory #(.IO(SUB_IO), .COLS(32 * SUB_IO)) u_mem (
    .clk, .rst_n, .req(mem_req), .we(mem_we), .addr(mem_addr), .wdata(wr_data),
    .ready(mem_ready), .rvalid(mem_rvalid), .rdata(mem_rdata)
  );

  // ---------------- output layer ----------------
  logic signed [ACC_W-1:0] u [NY_P];
  logic [NY_P-1:0]         sat;
  clipped_t                x [NG];
  logic [NG-1:0]           clipped;
  prob_t                   p [NG];
  logic [7:0]              rnd;
  logic [LFSR_W-1:0]       lfsr_state;

  for (genvar i = 0; i < NY_P; i++) begin : g_neuron
    membrane_adder #(.W_IN(WB_P)) u_add (
      .clk, .rst_n, .clr(acc_clr), .add(acc_add), .flip(acc_flip),
      .w(mem_rdata[i*WB_P +: WB_P]), .u(u[i]), .sat(sat[i])
    );
    spike_comparator u_cmp (
      .clk, .rst_n, .clr(acc_clr),
      .en(eval_en && (eval_pass == PSW'(i % SHARE))),
      .p(p[i / SHARE]), .rnd, .spike(out_spikes[i])
    );
  end

  for (genvar g = 0; g < NG; g++) begin : g_pwl
    clipper u_clip (.u(u[g*SHARE + int'(eval_pass)]), .x(x[g]), .clipped(clipped[g]));
    pwl_sigmoid u_pwl (.x(x[g]), .p(p[g]));
  end

  lfsr16 u_lfsr (.clk, .rst_n, .en(lfsr_en), .state(lfsr_state), .rnd);

  // First-to-spike: any spike ends the sample; the lowest index wins a tie.
  always_comb begin
    any_spike      = |out_spikes;
    decision_class = '0;
    for (int i = NY_P - 1; i >= 0; i--) if (out_spikes[i]) decision_class = YW'(i);
  end

  // ---------------- activity counters ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_reads <= '0; cnt_stall <= '0; cnt_sat <= '0;
      cnt_clip  <= '0; cnt_flip  <= '0; cnt_zero_win <= '0;
    end else begin
      if (c_mem_req)                         cnt_reads    <= cnt_reads + 1;
      if (as_stall)                          cnt_stall    <= cnt_stall + 1;
      if (|sat)                              cnt_sat      <= cnt_sat + 1;
      if (eval_en)                           cnt_clip     <= cnt_clip + 32'($countones(clipped));
      if (as_pop && as_flip)                 cnt_flip     <= cnt_flip + 1;
      if (pat_valid && pat_ready && pattern == '0) cnt_zero_win <= cnt_zero_win + 1;
    end
  end

  a_no_write_while_busy: assert property (@(posedge clk) disable iff (!rst_n) mem_we |-> !c_mem_req);
  // lfsr_state is kept for visibility in waveforms.
  logic unused_ok;
  assign unused_ok = ^{lfsr_state, step_t, bias_read};
endmodule
