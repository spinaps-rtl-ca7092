// stt_subarray -- behavioural model of one STT-RAM subarray (mat).
//
// This is a behavioural model, not synthesizable logic for a real macro: the
// cells of a 1T/1MTJ STT-RAM array are analog devices (low resistance for
// '0', high for '1') read through sense amplifiers.  Here each cell is one
// stored bit.  The subarray has 64 word lines of 4096 cells; a read enables
// one word line and a 32:1 column multiplexer passes one 128-bit group to the
// sense amplifiers, a write drives the same 128 bits.  The size (64 x 4096,
// 128-bit port) is the one the paper's memory design uses.
//
// Interface and timing, in core clock cycles: a request is accepted when
// 'ready' is high.  'wl' is the one-hot word-line select from the bank's
// predecoder and 'col' the column group.  Read data appear with a one-cycle
// 'rvalid' pulse RD_LAT cycles after the request cycle (RD_LAT >= 1);
// a read occupies the
// array for CYCLE cycles and a write for WCYCLE cycles (the paper's 7.34 ns
// read, 100 MHz access rate and 10 ns write pulse against a 500 MHz core
// clock).  Cells are not reset, as in a real memory.
module stt_subarray
  import spinaps_pkg::*;
#(
  parameter int unsigned ROWS     = 64,
  parameter int unsigned COLS     = 4096,
  parameter int unsigned IO       = 128,
  parameter int unsigned RD_LAT   = READ_LAT,
  parameter int unsigned CYCLE    = MEM_CYCLE,
  parameter int unsigned WCYCLE   = WRITE_CYC,
  localparam int unsigned GROUPS  = COLS / IO,
  localparam int unsigned CW      = (GROUPS > 1) ? $clog2(GROUPS) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            req,
  input  logic            we,
  input  logic [ROWS-1:0] wl,
  input  logic [CW-1:0]   col,
  input  logic [IO-1:0]   wdata,
  output logic            ready,
  output logic            rvalid,
  output logic [IO-1:0]   rdata
);
  logic [COLS-1:0] cells [ROWS];
  logic [7:0]      busy_cnt;
  logic [7:0]      lat_cnt;
  logic [IO-1:0]   sensed;
  int unsigned     row;

  always_comb begin
    row = 0;
    for (int unsigned r = 0; r < ROWS; r++) if (wl[r]) row = r;
  end

  assign ready = (busy_cnt == 0);

  always_ff @(posedge clk) begin
    if (req && ready && we) cells[row][col*IO +: IO] <= wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_cnt <= '0;
      lat_cnt  <= '0;
      sensed   <= '0;
      rvalid   <= 1'b0;
      rdata    <= '0;
    end else begin
      rvalid <= 1'b0;
      if (req && ready) begin
        busy_cnt <= 8'(we ? WCYCLE - 1 : CYCLE - 1);
        if (!we) begin
          sensed  <= cells[row][col*IO +: IO];
          lat_cnt <= 8'(RD_LAT - 1);
          if (RD_LAT == 1) begin
            rvalid <= 1'b1;
            rdata  <= cells[row][col*IO +: IO];
          end
        end
      end else if (busy_cnt != 0) begin
        busy_cnt <= busy_cnt - 1'b1;
      end
      if (lat_cnt != 0) begin
        lat_cnt <= lat_cnt - 1'b1;
        if (lat_cnt == 1) begin
          rvalid <= 1'b1;
          rdata  <= sensed;
        end
      end
    end
  end

  a_onehot_wl: assert property (@(posedge clk) disable iff (!rst_n) req |-> $onehot(wl));
  a_req_ready: assert property (@(posedge clk) disable iff (!rst_n) req |-> ready);
endmodule
