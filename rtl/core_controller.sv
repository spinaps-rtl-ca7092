// core_controller -- control logic of a SpinAPS core.
//
// Runs one inference (one input sample) with first-to-spike decoding.  For
// every algorithmic time step t = 1..T it
//   1. LATCH  waits for the input spikes of step t and shifts them into the
//             input registers (handshake in_valid / in_ready);
//   2. SCAN   clears the membrane potentials and output spikes, then walks
//             the input neurons 0..N_IN-1, handing each one's tau-bit window
//             pattern (spike window select = t-1) to the address storage
//             registers; meanwhile it issues memory reads: first the bias
//             line (read every step, the "always read" line), then the
//             addresses from the address store, one read whenever the memory
//             is ready; each returned word is added into all NY adders;
//   3. DRAIN  waits until all addresses have been read and added;
//   4. EVAL   runs PASSES passes; in pass p every PWL generator g serves
//             output neuron g*PASSES+p and that neuron's comparator draws its
//             spike; the LFSR advances every pass;
//   5. DECIDE ends the sample at the first step with an output spike
//             (decided = 1, decision_t = t) or after step T without one
//             (decided = 0); otherwise it goes on with step t+1.
// The order of work within a step follows the paper (window, read active
// word lines, accumulate, PWL, compare with LFSR, first spike decides); the
// state machine, the handshakes and reading the bias line first are this
// design's choices.  At most one memory read is outstanding.
module core_controller
  import spinaps_pkg::*;
#(
  parameter int unsigned N_IN   = NX,
  parameter int unsigned T      = T_STEPS,
  parameter int unsigned WIN    = TAU,
  parameter int unsigned PASSES = PWL_SHARE,
  parameter int unsigned AW     = 11,
  localparam int unsigned NW    = $clog2(N_IN),
  localparam int unsigned TW    = $clog2(T + 1),
  localparam int unsigned SW    = (T > 1) ? $clog2(T) : 1,
  localparam int unsigned PSW   = (PASSES > 1) ? $clog2(PASSES) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  // sample control
  input  logic           start,
  output logic           busy,
  output logic           done,
  output logic           decided,
  output logic [TW-1:0]  decision_t,
  // input spikes
  input  logic           in_valid,
  output logic           in_ready,
  output logic           inreg_clear,
  output logic           inreg_shift,
  // spike window / address store
  output logic [SW-1:0]  win_sel,
  output logic [NW-1:0]  scan_idx,
  output logic           pat_valid,
  input  logic           pat_ready,
  input  logic           as_valid,
  input  logic [AW-1:0]  as_addr,
  input  logic           as_flip,
  input  logic           as_busy,
  output logic           as_pop,
  // synaptic memory (read side)
  input  logic           mem_ready,
  input  logic           mem_rvalid,
  output logic           mem_req,
  output logic [AW-1:0]  mem_addr,
  // neurons
  output logic           acc_clr,
  output logic           acc_add,
  output logic           acc_flip,
  output logic           eval_en,
  output logic [PSW-1:0] eval_pass,
  output logic           lfsr_en,
  input  logic           any_spike,
  // status
  output logic [TW-1:0]  step_t,
  output logic           bias_read
);
  typedef enum logic [2:0] {S_IDLE, S_LATCH, S_SCAN, S_DRAIN, S_EVAL, S_DECIDE, S_DONE} state_t;

  localparam logic [AW-1:0] BIAS_ADDR = AW'(N_IN * WIN);

  state_t         state;
  logic [TW-1:0]  t;
  logic [NW-1:0]  idx;
  logic [PSW-1:0] pass;
  logic           bias_pend, outstanding, pend_flip, issue, issue_bias;

  assign busy        = (state != S_IDLE) && (state != S_DONE);
  assign done        = (state == S_DONE);
  assign in_ready    = (state == S_LATCH);
  assign inreg_clear = start && !busy;
  assign inreg_shift = in_ready && in_valid;
  assign win_sel     = SW'(t - 1'b1);
  assign scan_idx    = idx;
  assign pat_valid   = (state == S_SCAN);
  assign eval_en     = (state == S_EVAL);
  assign eval_pass   = pass;
  assign lfsr_en     = (state == S_EVAL);
  assign step_t      = t;
  // New step: clear potentials and spikes as the spikes of step t arrive.
  assign acc_clr     = inreg_shift;

  // Memory read issue: bias line first, then the address store.
  always_comb begin
    issue_bias = 1'b0;
    issue      = 1'b0;
    if ((state == S_SCAN || state == S_DRAIN) && mem_ready && !outstanding) begin
      if (bias_pend)     begin issue = 1'b1; issue_bias = 1'b1; end
      else if (as_valid) begin issue = 1'b1; end
    end
  end
  assign mem_req   = issue;
  assign mem_addr  = issue_bias ? BIAS_ADDR : as_addr;
  assign as_pop    = issue && !issue_bias;
  assign bias_read = issue_bias;
  assign acc_add   = mem_rvalid;
  assign acc_flip  = pend_flip;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      t           <= '0;
      idx         <= '0;
      pass        <= '0;
      bias_pend   <= 1'b0;
      outstanding <= 1'b0;
      pend_flip   <= 1'b0;
      decided     <= 1'b0;
      decision_t  <= '0;
    end else begin
      if (issue) begin
        outstanding <= 1'b1;
        pend_flip   <= issue_bias ? 1'b0 : as_flip;
      end else if (mem_rvalid) begin
        outstanding <= 1'b0;
      end
      if (issue_bias) bias_pend <= 1'b0;

      unique case (state)
        S_IDLE, S_DONE: if (start) begin
          state      <= S_LATCH;
          t          <= TW'(1);
          decided    <= 1'b0;
          decision_t <= '0;
        end
        S_LATCH: if (in_valid) begin
          state     <= S_SCAN;
          idx       <= '0;
          bias_pend <= 1'b1;
        end
        S_SCAN: if (pat_ready) begin
          if (idx == NW'(N_IN - 1)) state <= S_DRAIN;
          else                    idx   <= idx + 1'b1;
        end
        S_DRAIN: if (!bias_pend && !outstanding && !as_busy && !issue) begin
          state <= S_EVAL;
          pass  <= '0;
        end
        S_EVAL: begin
          if (pass == PSW'(PASSES - 1)) state <= S_DECIDE;
          else                          pass  <= pass + 1'b1;
        end
        S_DECIDE: begin
          if (any_spike) begin
            decided    <= 1'b1;
            decision_t <= t;
            state      <= S_DONE;
          end else if (t == TW'(T)) begin
            state <= S_DONE;
          end else begin
            t     <= t + 1'b1;
            state <= S_LATCH;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_one_outstanding: assert property (@(posedge clk) disable iff (!rst_n) issue |-> !outstanding);
  a_rvalid_expected: assert property (@(posedge clk) disable iff (!rst_n) mem_rvalid |-> outstanding);
endmodule
