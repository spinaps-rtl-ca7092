// spike_window -- spike window generator shared by all input neurons.
//
// A multiplexer that turns the content of one input register into the
// tau-bit activation pattern that enables that neuron's kernel word lines.
// The select value is t-1, set by the controller at time step t: only the
// t-1 spikes that have already arrived (at most tau of them) pass, the rest
// of the pattern is zero.  The pattern is printed most recent spike first,
// as in the paper's example: at t = 3 the pattern is "s2 s1 0 0 0 0 0".
// Bit pattern[TAU-k] therefore enables word line k of the neuron (lag k).
//
// reg_bits is the register after the shift of step t (bit 0 = s_t, which the
// window does not use until the next step).  Purely combinational.
module spike_window #(
  parameter int unsigned T   = 8,
  parameter int unsigned TAU = 7,
  localparam int unsigned SW = (T > 1) ? $clog2(T) : 1
) (
  input  logic [T-1:0]   reg_bits,
  input  logic [SW-1:0]  sel,       // t - 1
  output logic [TAU-1:0] pattern
);
  always_comb begin
    pattern = '0;
    for (int unsigned k = 1; k <= TAU; k++) begin
      if (k < T && k <= 32'(sel)) pattern[TAU-k] = reg_bits[k];
    end
  end
endmodule
