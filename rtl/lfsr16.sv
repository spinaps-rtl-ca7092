// lfsr16 -- 16-bit linear feedback shift register shared by all output
// neurons of a core.
//
// A Fibonacci LFSR with the maximal-length polynomial
// x^16 + x^14 + x^13 + x^11 + 1 (period 65535).  It advances by one step on
// every cycle with 'en' high.  The comparators use the low 8 bits 'rnd' as
// the uniform random number against which the spike probability is compared.
// The 16-bit length and the sharing follow the paper; the polynomial, the
// seed and the choice of the low 8 bits are this design's.
module lfsr16
  import spinaps_pkg::*;
#(
  parameter logic [LFSR_W-1:0] SEED = 16'hACE1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              en,
  output logic [LFSR_W-1:0] state,
  output logic [7:0]        rnd
);
  logic fb;
  assign fb  = state[15] ^ state[13] ^ state[12] ^ state[10];
  assign rnd = state[7:0];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  state <= SEED;
    else if (en) state <= {state[14:0], fb};
  end
  // An all-zero state would lock the register.
  a_nonzero: assert property (@(posedge clk) disable iff (!rst_n) state != '0);
endmodule
