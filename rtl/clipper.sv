// clipper -- clips the membrane potential to [-8, 8] for the PWL sigmoid.
//
// The 18-bit potential (two's complement, 3 fraction bits) is limited to the
// range [-8, 8] and re-coded as an 8-bit sign-magnitude fixed-point number:
// 1 sign bit, 4 integer bits and 3 fraction bits (S IIII FFF), as the paper
// prescribes.  Magnitudes above 8.0 (64 LSB) become exactly 8.0; 'clipped'
// marks that case.  Purely combinational.
module clipper
  import spinaps_pkg::*;
#(
  parameter int unsigned W_IN = ACC_W
) (
  input  logic signed [W_IN-1:0] u,
  output clipped_t               x,
  output logic                   clipped
);
  localparam int unsigned LIMIT = 64;  // 8.0 with 3 fraction bits
  logic [W_IN-1:0] mag;
  always_comb begin
    mag = u[W_IN-1] ? W_IN'(-u) : W_IN'(u);
    clipped = (mag > W_IN'(LIMIT));
    x[7]    = u[W_IN-1];
    x[6:0]  = clipped ? 7'(LIMIT) : mag[6:0];
  end
endmodule
