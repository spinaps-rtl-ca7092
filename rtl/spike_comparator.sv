// spike_comparator -- output spike decision of one output neuron.
//
// When enabled, compares the neuron's spike probability (from its PWL
// generator) with the shared LFSR's 8-bit random number and registers a spike
// if the probability is greater, which realises a Bernoulli draw with
// probability p/256.  The spike is held until 'clr' (start of the next time
// step) so that the first-to-spike logic can read it.  The strict
// greater-than follows the paper; the holding register is this design's.
module spike_comparator
  import spinaps_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  clr,
  input  logic  en,
  input  prob_t p,
  input  prob_t rnd,
  output logic  spike
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   spike <= 1'b0;
    else if (clr) spike <= 1'b0;
    else if (en)  spike <= (p > rnd);
  end
endmodule
