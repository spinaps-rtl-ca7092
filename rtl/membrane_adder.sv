// membrane_adder -- signed accumulator of one output neuron.
//
// Holds the membrane potential u of one output neuron ("Reg out").  Each
// time the synaptic memory returns a word line, the neuron's 8-bit synapse
// from that line ("Reg in") is added to u.  The sign bit of the synapse is
// flipped when the input neuron that owns the line carries a negative input
// (flip = 1).  'clr' zeroes u at the start of every algorithmic time step,
// because u_t is recomputed from the whole spike window each step.
//
// Widths follow the paper (8-bit synapse, 18-bit potential).  Sign-magnitude
// synapses and saturation at the 18-bit limits (instead of wrap-around) are
// this design's choices; 'sat' pulses for one cycle when an addition clips.
// One cycle per addition.
module membrane_adder
  import spinaps_pkg::*;
#(
  parameter int unsigned W_IN  = WB,
  parameter int unsigned W_ACC = ACC_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clr,
  input  logic                    add,
  input  logic                    flip,
  input  logic [W_IN-1:0]         w,
  output logic signed [W_ACC-1:0] u,
  output logic                    sat
);
  localparam logic signed [W_ACC:0] MAXV = (W_ACC+1)'((1 << (W_ACC-1)) - 1);
  localparam logic signed [W_ACC:0] MINV = -MAXV - 1;

  logic signed [W_IN-1:0] mag;
  logic signed [W_ACC:0]  sum;
  logic                   neg;

  always_comb begin
    mag = $signed({1'b0, w[W_IN-2:0]});
    neg = w[W_IN-1] ^ flip;
    sum = neg ? ((W_ACC+1)'(u) - (W_ACC+1)'(mag)) : ((W_ACC+1)'(u) + (W_ACC+1)'(mag));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      u   <= '0;
      sat <= 1'b0;
    end else if (clr) begin
      u   <= '0;
      sat <= 1'b0;
    end else if (add) begin
      if (sum > MAXV) begin
        u <= MAXV[W_ACC-1:0]; sat <= 1'b1;
      end else if (sum < MINV) begin
        u <= MINV[W_ACC-1:0]; sat <= 1'b1;
      end else begin
        u <= sum[W_ACC-1:0]; sat <= 1'b0;
      end
    end else begin
      sat <= 1'b0;
    end
  end
endmodule
