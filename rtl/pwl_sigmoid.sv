// pwl_sigmoid -- piecewise-linear sigmoid generator ("PWL gen").
//
// Approximates the logistic sigmoid with segments whose ends are powers of
// two, so that only a shift and two subtractions are needed.  For a negative
// input x = -(n + f), n the integer and f the fraction of |x|,
//     y = (1/2 - f/4) / 2^n,
// and by symmetry y = 1 - (1/2 - f/4) / 2^n for positive x.  (This is the
// paper's formula, with its fractional part of a negative number written as
// -f.)  The input is the clipper's S IIII FFF sign-magnitude code; the output
// is y scaled by 256, an unsigned 8-bit value where 1.0 saturates to 255.
// With f in eighths, 256*(1/2 - f/4) = 128 - 8*FFF exactly; the shift by n
// truncates, and the positive side is 256 minus the truncated negative value,
// so p(x) + p(-x) = 256 (except where 256 saturates to 255).
// Purely combinational; one generator serves 16 output neurons in turn.
module pwl_sigmoid
  import spinaps_pkg::*;
(
  input  clipped_t x,
  output prob_t    p
);
  logic [3:0] n;
  logic [2:0] f;
  logic [7:0] base;     // 256 * (1/2 - f/4), 72..128
  logic [7:0] low;      // value for the negative side
  logic [8:0] high;
  always_comb begin
    n    = x[6:3];
    f    = x[2:0];
    base = 8'd128 - {2'b00, f, 3'b000};
    low  = (n >= 4'd8) ? 8'd0 : (base >> n);
    high = 9'd256 - {1'b0, low};
    if (x[7]) p = low;
    else      p = high[8] ? 8'd255 : high[7:0];
  end
endmodule
