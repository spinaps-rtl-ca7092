// stt_bank -- one bank of the synaptic STT-RAM: a predecoder and four
// subarrays.
//
// The 11-bit word-line address is split into a 6-bit row (addr[10:5]) and a
// 5-bit column group (addr[4:0]).  The predecoder decodes the row in two
// 3-bit groups to one-hot vectors and ANDs them into the one-hot word-line
// select of the subarrays (a two-level predecoder).  All four subarrays are
// accessed together and each supplies 128 bits, so the bank delivers a
// 512-bit slice of the word line: the synapses of 64 output neurons.
// The bank layout (four subarrays around a predecoder, 64 x 4096 subarrays
// with 128-bit ports) is the paper's; the address split and the choice that
// every subarray holds a slice of every word line are this design's,
// picked so that one full 2048-bit word line is read per memory cycle, the
// rate the paper's throughput figure implies.
//
// Timing is that of stt_subarray; 'ready' and 'rvalid' are those of subarray
// 0 (all four run in lock-step).
module stt_bank
  import spinaps_pkg::*;
#(
  parameter int unsigned NSUB = 4,
  parameter int unsigned ROWS = 64,
  parameter int unsigned COLS = 4096,
  parameter int unsigned IO   = 128,
  localparam int unsigned RW  = $clog2(ROWS),
  localparam int unsigned CW  = $clog2(COLS / IO),
  localparam int unsigned AW  = RW + CW
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               req,
  input  logic               we,
  input  logic [AW-1:0]      addr,
  input  logic [NSUB*IO-1:0] wdata,
  output logic               ready,
  output logic               rvalid,
  output logic [NSUB*IO-1:0] rdata
);
  localparam int unsigned RLO = RW / 2;
  localparam int unsigned RHI = RW - RLO;

  logic [RW-1:0]       row;
  logic [CW-1:0]       col;
  logic [(1<<RHI)-1:0] pre_hi;
  logic [(1<<RLO)-1:0] pre_lo;
  logic [ROWS-1:0]     wl;
  logic [NSUB-1:0]     sub_ready, sub_rvalid;

  assign row = addr[AW-1:CW];
  assign col = addr[CW-1:0];

  // Predecoder.
  always_comb begin
    pre_hi = '0;
    pre_lo = '0;
    pre_hi[row[RW-1:RLO]] = 1'b1;
    pre_lo[row[RLO-1:0]]  = 1'b1;
    for (int r = 0; r < ROWS; r++) wl[r] = pre_hi[r >> RLO] & pre_lo[r % (1 << RLO)];
  end

  for (genvar s = 0; s < NSUB; s++) begin : g_sub
    stt_subarray #(.ROWS(ROWS), .COLS(COLS), .IO(IO)) u_sub (
      .clk, .rst_n, .req, .we, .wl, .col,
      .wdata (wdata[s*IO +: IO]),
      .ready (sub_ready[s]),
      .rvalid(sub_rvalid[s]),
      .rdata (rdata[s*IO +: IO])
    );
  end

  assign ready  = sub_ready[0];
  assign rvalid = sub_rvalid[0];

  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
                               (sub_ready == '0 || sub_ready == '1) && (sub_rvalid == '0 || sub_rvalid == '1));
endmodule
