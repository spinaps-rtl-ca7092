// synaptic_memory -- banked STT-RAM holding the synapses of one core.
//
// 2048 word lines of 2048 bits: each word line holds one 8-bit synapse for
// each of the 256 output neurons (bits 8*i+7:8*i for output neuron i).
// Word lines 0..1791 hold the stimulus kernels (line j*7+k-1 is lag k of
// input neuron j), line 1792 the biases gamma; the rest are unused.  The
// array is built from four banks of four 64 x 4096 subarrays; every subarray
// holds a 128-bit slice of every word line (output neurons 16*s..16*s+15 for
// subarray s = 4*bank + i), so a whole word line is read in one access.
//
// Interface: one request (read, or write with we) when 'ready' is high; read
// data come READ_LAT cycles later with a one-cycle 'rvalid'.  A read occupies
// the memory for MEM_CYCLE cycles (one 2048-bit word line per 10 ns, i.e.
// 256 synaptic operations per 100 MHz cycle), a write for WRITE_CYC cycles.
// The capacity and word width are the paper's; the bank/subarray address
// split is this design's (see stt_bank).
module synaptic_memory
  import spinaps_pkg::*;
#(
  parameter int unsigned NBANK = 4,
  parameter int unsigned NSUB  = 4,
  parameter int unsigned ROWS  = 64,
  parameter int unsigned COLS  = 4096,
  parameter int unsigned IO    = 128,
  localparam int unsigned AW   = $clog2(ROWS) + $clog2(COLS / IO),
  localparam int unsigned DW   = NBANK * NSUB * IO
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          req,
  input  logic          we,
  input  logic [AW-1:0] addr,
  input  logic [DW-1:0] wdata,
  output logic          ready,
  output logic          rvalid,
  output logic [DW-1:0] rdata
);
  localparam int unsigned BW = NSUB * IO;
  logic [NBANK-1:0] bank_ready, bank_rvalid;

  for (genvar b = 0; b < NBANK; b++) begin : g_bank
    stt_bank #(.NSUB(NSUB), .ROWS(ROWS), .COLS(COLS), .IO(IO)) u_bank (
      .clk, .rst_n, .req, .we, .addr,
      .wdata (wdata[b*BW +: BW]),
      .ready (bank_ready[b]),
      .rvalid(bank_rvalid[b]),
      .rdata (rdata[b*BW +: BW])
    );
  end

  assign ready  = &bank_ready;
  assign rvalid = bank_rvalid[0];

  a_req_ready: assert property (@(posedge clk) disable iff (!rst_n) req |-> ready);
endmodule
