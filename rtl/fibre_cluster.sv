// fibre_cluster: clustering of fibre-detector hits on the front-end FPGA.
// A particle crossing a fibre ribbon fires neighbouring SiPM channels at
// the same time, while dark counts fire single channels; keeping only
// clusters of at least MIN_SIZE adjacent channels removes most dark counts.
//
// Input is the time-sorted item stream of hit_sorter. The hits of one
// time stamp slot (8 ns) set bits in a CHANNELS-wide map (channel =
// chip * 32 + MuTRiG channel, taken from the col field). When the slot is
// complete the map is scanned, one run of adjacent set bits per clock:
// runs of MIN_SIZE or more become a cluster word (first channel, size up
// to 31), shorter runs are counted as suppressed. Clustering in time is
// therefore by 8 ns slot; clustering in space and the suppression of
// single-hit clusters follow the paper, the slot granularity and the
// word format are this design's choice. Input is stalled while a slot is
// scanned. A frame end travels behind the last cluster of its slot.
module fibre_cluster #(
  parameter int CHANNELS = 256,   // 8 MuTRiGs x 32 channels per board
  parameter int MIN_SIZE = 2
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          in_valid,
  output logic          in_ready,
  input  daq_pkg::hit_t in_hit,
  input  logic          in_is_hit,
  input  logic          in_slot_end,
  input  logic          in_frame_end,
  output logic          out_valid,
  input  logic          out_ready,
  output daq_pkg::item_t out_item,
  output logic [15:0]   suppressed_cnt
);
  import daq_pkg::*;
  localparam int CW = $clog2(CHANNELS);
  logic [CHANNELS-1:0] map;
  logic                scan, fe_r;
  logic [TS_W-1:0]     ts_r;
  logic [CW-1:0]       p;
  logic                any;
  logic [5:0]          len;
  logic [CHANNELS-1:0] shifted, clr;
  logic [CW+4:0]       chan;
  logic                out_free;

  assign out_free = !out_valid || out_ready;
  assign in_ready = !scan;
  assign chan     = (CW+5)'(in_hit.chip) * (CW+5)'(32) + (CW+5)'(in_hit.col[4:0]);

  always_comb begin
    any = |map;
    p   = '0;
    for (int i = CHANNELS - 1; i >= 0; i--) if (map[i]) p = CW'(i);
    shifted = map >> p;
    len = '0;
    for (int i = 0; i < 31; i++) if (shifted[i] && len == 6'(i)) len = 6'(i + 1);
    clr = ((CHANNELS'(1) << len) - 1'b1) << p;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      map <= '0; scan <= 1'b0; fe_r <= 1'b0; ts_r <= '0;
      out_valid <= 1'b0; out_item <= '0; suppressed_cnt <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (!scan) begin
        if (in_valid) begin
          if (in_is_hit && chan < (CW+5)'(CHANNELS)) map[chan[CW-1:0]] <= 1'b1;
          if (in_slot_end) begin
            scan <= 1'b1;
            ts_r <= in_hit.ts;
            fe_r <= in_frame_end;
          end
        end
      end else if (out_free) begin
        if (!any) begin
          scan <= 1'b0;
          if (fe_r) begin
            out_valid <= 1'b1;
            out_item  <= '{has_word: 1'b0, word: '0, frame_end: 1'b1,
                           frame: 24'(ts_r >> FRAME_LOG2)};
          end
        end else begin
          map <= map & ~clr;
          if (len >= 6'(MIN_SIZE)) begin
            out_valid <= 1'b1;
            out_item  <= '{has_word: 1'b1,
                           word: fib_word(ts_r[FRAME_LOG2-1:0], 10'(p), 5'(len)),
                           frame_end: 1'b0, frame: '0};
          end else if (suppressed_cnt != '1) begin
            suppressed_cnt <= suppressed_cnt + 1'b1;
          end
        end
      end
    end
  end
endmodule
