// fibre_coinc: coincidence of the two ends of the scintillating fibres on
// the fibre switching board. Each ribbon is read out at both ends; a real
// particle gives a cluster at both ends, a SiPM dark count only at one.
// Front-end boards 0..N_FEB/2-1 are taken to read one end and boards
// N_FEB/2..N_FEB-1 the other, board f pairing with f + N_FEB/2, with equal
// channel numbers at both ends (this mapping is this design's choice).
//
// Input is the merged, frame-aligned stream (word and source board). For
// a cluster word the table of the other end is looked up at (board pair,
// first channel): an entry of the current frame whose time stamp bin is
// within WINDOW bins makes a coincidence, which is sent as one farm-link
// fibre word carrying both time stamps; otherwise the cluster is stored in
// its own end's table. Clusters that never find a partner are dropped and
// counted. Frames are told apart by an 8-bit frame tag that advances on
// every trailer, so tables need no clearing. Other words and trailers pass
// unchanged. One word per clock, one clock latency.
module fibre_coinc #(
  parameter int N_FEB    = 12,
  parameter int CHANNELS = 256,
  parameter int WINDOW   = 1
) (
  input  logic            clk,
  input  logic            rst,
  input  logic            in_valid,
  output logic            in_ready,
  input  daq_pkg::lword_t in_word,
  input  logic [5:0]      in_src,
  output logic            out_valid,
  input  logic            out_ready,
  output daq_pkg::lword_t out_word,
  output logic [31:0]     coinc_cnt,
  output logic [31:0]     single_cnt
);
  import daq_pkg::*;
  localparam int HALF = N_FEB / 2;
  localparam int POS  = HALF * CHANNELS;
  localparam int PW   = $clog2(POS);
  typedef struct packed { logic [7:0] tag; logic [2:0] tsf; } ent_t;
  ent_t tab [2][POS];
  logic [7:0]  tag;
  logic        side, is_clu, hit_o, out_free, is_trl;
  logic [5:0]  pair;
  logic [9:0]  chan;
  logic [2:0]  tsf;
  logic [PW-1:0] pos;
  ent_t        other;
  logic [3:0]  dt;

  assign out_free = !out_valid || out_ready;
  assign in_ready = out_free;

  always_comb begin
    is_clu = !in_word.k && in_word.data[31:30] == W_FIB;
    is_trl = in_word.k && in_word.data[31:24] == K28_4;
    side   = (in_src >= 6'(HALF));
    pair   = side ? in_src - 6'(HALF) : in_src;
    chan   = in_word.data[14:5];
    tsf    = in_word.data[29:27];
    pos    = PW'(int'(pair) * CHANNELS + int'(chan));
    other  = tab[!side][pos];
    dt     = (tsf > other.tsf) ? 4'(tsf - other.tsf) : 4'(other.tsf - tsf);
    hit_o  = other.tag == tag && dt <= 4'(WINDOW);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      tag <= 8'd1; out_valid <= 1'b0; out_word <= '0; coinc_cnt <= '0; single_cnt <= '0;
      for (int s = 0; s < 2; s++)
        for (int p = 0; p < POS; p++) tab[s][p] <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && out_free) begin
        if (is_clu) begin
          if (hit_o) begin
            out_valid <= 1'b1;
            out_word  <= '{k: 1'b0, data: {1'b1, tsf, in_src, 1'b1, other.tsf, 3'd0, chan,
                                           in_word.data[4:0]}};
            coinc_cnt <= coinc_cnt + 1'b1;
            tab[!side][pos].tag <= tag - 1'b1;     // partner used up
          end else begin
            tab[side][pos] <= '{tag: tag, tsf: tsf};
            single_cnt <= single_cnt + 1'b1;
          end
        end else begin
          out_valid <= 1'b1;
          out_word  <= in_word;
          if (is_trl) tag <= (tag == 8'hFF) ? 8'd1 : tag + 1'b1;
        end
      end
    end
  end
endmodule
