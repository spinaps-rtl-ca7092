// addr_store -- address storage registers between the spike window generator
// and the synaptic memory.
//
// The kernel of input neuron j occupies word lines j*TAU .. j*TAU+TAU-1
// (word line k of the neuron, k = 1..TAU, holds the synapses for a spike k
// steps old).  For each input neuron the controller hands over the tau-bit
// activation pattern; this block converts every set bit into the address of
// its word line, earliest word line first, one address per cycle, and keeps
// the addresses in a small FIFO of registers until the memory, which accepts
// one read per memory cycle, takes them.  A neuron with an all-zero pattern
// costs one cycle and no memory access.  Each address carries the neuron's
// input-sign flag so the adders can flip the synapse sign.
//
// Handshakes: a pattern is taken on a cycle with pat_valid & pat_ready; an
// address leaves on a cycle with rd_valid & rd_pop.  'stall' is high on a
// cycle where a pending address cannot enter the full FIFO.  The address
// computation follows the paper's kernel mapping; the FIFO (depth 8) and the
// handshakes are this design's choices.
module addr_store #(
  parameter int unsigned NX    = 256,
  parameter int unsigned TAU   = 7,
  parameter int unsigned DEPTH = 8,
  parameter int unsigned AW    = 11,
  localparam int unsigned NW   = $clog2(NX),
  localparam int unsigned PTRW = $clog2(DEPTH)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           pat_valid,
  input  logic [TAU-1:0] pat,
  input  logic [NW-1:0]  neuron,
  input  logic           flip,
  output logic           pat_ready,
  output logic           rd_valid,
  output logic [AW-1:0]  rd_addr,
  output logic           rd_flip,
  input  logic           rd_pop,
  output logic           busy,
  output logic           stall
);
  typedef struct packed {
    logic          flip;
    logic [AW-1:0] addr;
  } entry_t;

  entry_t          fifo [DEPTH];
  logic [PTRW-1:0] wr_ptr, rd_ptr;
  logic [PTRW:0]   count;

  logic [TAU-1:0]  cur_pat;
  logic [AW-1:0]   cur_base;
  logic            cur_flip;

  logic            full, push, pop, last_bit;
  logic [TAU-1:0]  lead;        // leading (earliest word line) set bit
  logic [AW-1:0]   lead_off;

  always_comb begin
    lead     = '0;
    lead_off = '0;
    for (int i = 0; i < TAU; i++) begin
      if (cur_pat[i]) begin       // last hit is the highest bit = word line 1
        lead     = '0;
        lead[i]  = 1'b1;
        lead_off = AW'(TAU - 1 - i);
      end
    end
  end

  assign full      = (count == (PTRW+1)'(DEPTH));
  assign push      = (cur_pat != '0) && !full;
  assign pop       = rd_valid && rd_pop;
  assign last_bit  = ((cur_pat & (cur_pat - 1'b1)) == '0);
  assign pat_ready = (cur_pat == '0) || (push && last_bit);
  assign rd_valid  = (count != '0);
  assign rd_addr   = fifo[rd_ptr].addr;
  assign rd_flip   = fifo[rd_ptr].flip;
  assign busy      = (cur_pat != '0) || (count != '0);
  assign stall     = (cur_pat != '0) && full;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur_pat  <= '0;
      cur_base <= '0;
      cur_flip <= 1'b0;
      wr_ptr   <= '0;
      rd_ptr   <= '0;
      count    <= '0;
    end else begin
      if (pat_valid && pat_ready) begin
        cur_pat  <= pat;
        cur_base <= AW'(neuron) * AW'(TAU);
        cur_flip <= flip;
      end else if (push) begin
        cur_pat  <= cur_pat & ~lead;
      end
      if (push) begin
        fifo[wr_ptr] <= '{flip: cur_flip, addr: cur_base + lead_off};
        wr_ptr       <= (wr_ptr == PTRW'(DEPTH-1)) ? '0 : wr_ptr + 1'b1;
      end
      if (pop) rd_ptr <= (rd_ptr == PTRW'(DEPTH-1)) ? '0 : rd_ptr + 1'b1;
      count <= count + (PTRW+1)'(push) - (PTRW+1)'(pop);
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) !(full && push));
  a_pop_valid:   assert property (@(posedge clk) disable iff (!rst_n) rd_pop |-> rd_valid);
endmodule
