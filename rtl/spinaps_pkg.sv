// spinaps_pkg -- sizes, number formats and shared helpers of the SpinAPS core.
//
// The SpinAPS core evaluates a two-layer probabilistic spiking network of
// generalized-linear-model (GLM) neurons with first-to-spike decoding.  The
// constants below are the core's main configuration: 256 input and 256 output
// neurons, 8-bit synapses, a presentation time of T = 8 algorithmic steps and
// a spike integration window of tau = 7 steps, an 18-bit membrane potential,
// one piecewise-linear (PWL) sigmoid generator per 16 output neurons and a
// shared 16-bit LFSR.  The memory clock figures (a 100 MHz synaptic memory
// next to 500 MHz neuron logic, 7.34 ns read, 10 ns write) set the cycle
// counts of the memory model.
//
// Number formats (this design's choice where noted):
//   synapse   8 bit sign-magnitude: bit 7 sign, bits 6:0 magnitude (the
//             paper reserves one bit for the sign and flips it for negative
//             inputs; sign-magnitude is what makes that a one-bit flip).
//   potential 18 bit two's complement with 3 fraction bits (one synapse
//             LSB = 1/8), so the clipped value lines up with the 4.3 format.
//   clipped   8 bit sign-magnitude S IIII FFF, magnitude at most 8.0.
//   prob      8 bit unsigned, 0..255 standing for 0..255/256.
package spinaps_pkg;

  localparam int unsigned NX        = 256;  // input neurons per core
  localparam int unsigned NY        = 256;  // output neurons per core
  localparam int unsigned WB        = 8;    // synapse precision b
  localparam int unsigned T_STEPS   = 8;    // presentation time T
  localparam int unsigned TAU       = 7;    // spike integration window
  localparam int unsigned ACC_W     = 18;   // membrane potential width
  localparam int unsigned PW        = 8;    // clipped potential / probability width
  localparam int unsigned PWL_SHARE = 16;   // output neurons per PWL generator
  localparam int unsigned LFSR_W    = 16;

  // Memory timing in 500 MHz core cycles.
  localparam int unsigned MEM_CYCLE = 5;    // one access per 10 ns (100 MHz)
  localparam int unsigned READ_LAT  = 4;    // 7.34 ns read, rounded up to 8 ns
  localparam int unsigned WRITE_CYC = 5;    // 10 ns write pulse

  typedef logic [WB-1:0]    synapse_t;
  typedef logic [ACC_W-1:0] potential_t;
  typedef logic [PW-1:0]    clipped_t;
  typedef logic [PW-1:0]    prob_t;

  // Word line that holds the bias (gamma) of every output neuron: the first
  // line after the NX*TAU kernel lines.
  function automatic int unsigned bias_line(int unsigned nx, int unsigned tau);
    return nx * tau;
  endfunction

  // Signed value of a sign-magnitude synapse, negated when flip is set.
  function automatic logic signed [WB:0] synapse_value(synapse_t w, logic flip);
    logic signed [WB:0] mag;
    mag = $signed({2'b00, w[WB-2:0]});
    return (w[WB-1] ^ flip) ? -mag : mag;
  endfunction

endpackage
