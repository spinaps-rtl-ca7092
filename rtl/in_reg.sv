// in_reg -- input spike registers ("In. Reg") of the SpinAPS input layer.
//
// Every input neuron owns a T-bit serial-in, parallel-out shift register.  At
// each algorithmic time step the core shifts the new spike of every input
// neuron into bit 0 of its register, so after the shift of step t bit 0 holds
// s_t, bit 1 holds s_{t-1}, and so on.  The spike window generator reads the
// parallel outputs.  'clear' empties all registers at the start of a sample.
//
// Interface: shift and spikes are sampled on the rising clock edge; q is the
// registered content.  The serial-in/parallel-out structure and the T-bit
// length follow the paper; shifting towards the MSB and the synchronous clear
// are this design's choices.
module in_reg #(
  parameter int unsigned NX = 256,
  parameter int unsigned T  = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  input  logic                 shift,
  input  logic [NX-1:0]        spikes,
  output logic [NX-1:0][T-1:0] q
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q <= '0;
    end else if (clear) begin
      q <= '0;
    end else if (shift) begin
      for (int j = 0; j < NX; j++) q[j] <= {q[j][T-2:0], spikes[j]};
    end
  end
endmodule
