// feb_link_tx: packer for the 6.25 Gbit/s optical link from a front-end
// board to its switching board. It turns the item stream of the board
// (formatted hit or cluster words, frame ends) into 32-bit link words and
// interleaves the monitoring words of the ASIC links, as the paper's
// front-end board does. One word per clock; a frame end becomes a
// frame trailer {K28.4, frame} after the frame's last word (the input is
// held for that clock). Monitoring words, {2'b10, chip, 8'b0, data}, fill
// clocks without data; each ASIC link has a one-word holding register and
// a word arriving while it is full is dropped and counted. The priority
// of data over monitoring is this design's choice. When out_valid is low
// the transceiver sends idle.
module feb_link_tx #(
  parameter int N_MON = 36
) (
  input  logic            clk,
  input  logic            rst,
  input  logic            in_valid,
  output logic            in_ready,
  input  daq_pkg::item_t  in_item,
  input  logic [N_MON-1:0] mon_valid,
  input  logic [15:0]     mon [N_MON],
  output logic            out_valid,
  output daq_pkg::lword_t out_word,
  output logic [15:0]     mon_drop_cnt
);
  import daq_pkg::*;
  localparam int IW = (N_MON > 1) ? $clog2(N_MON) : 1;
  logic [N_MON-1:0] pend;
  logic [15:0]      pdata [N_MON];
  logic             trl_pend;
  logic [23:0]      trl_frame;
  logic [IW-1:0]    mi;
  logic             take_mon;

  assign in_ready = !trl_pend;

  always_comb begin
    mi = '0;
    for (int i = N_MON - 1; i >= 0; i--) if (pend[i]) mi = IW'(i);
    take_mon = !trl_pend && !in_valid && (pend != '0);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      pend <= '0; trl_pend <= 1'b0; trl_frame <= '0;
      out_valid <= 1'b0; out_word <= '0; mon_drop_cnt <= '0;
      for (int i = 0; i < N_MON; i++) pdata[i] <= '0;
    end else begin
      out_valid <= 1'b0;
      if (trl_pend) begin
        out_valid <= 1'b1;
        out_word  <= '{k: 1'b1, data: trailer_word(trl_frame)};
        trl_pend  <= 1'b0;
      end else if (in_valid) begin
        if (in_item.has_word) begin
          out_valid <= 1'b1;
          out_word  <= '{k: 1'b0, data: in_item.word};
          if (in_item.frame_end) begin
            trl_pend  <= 1'b1;
            trl_frame <= in_item.frame;
          end
        end else if (in_item.frame_end) begin
          out_valid <= 1'b1;
          out_word  <= '{k: 1'b1, data: trailer_word(in_item.frame)};
        end
      end else if (take_mon) begin
        out_valid <= 1'b1;
        out_word  <= '{k: 1'b0, data: {W_MON, 6'(mi), 8'd0, pdata[mi]}};
      end
      for (int i = 0; i < N_MON; i++) begin
        if (take_mon && IW'(i) == mi) pend[i] <= 1'b0;
        if (mon_valid[i]) begin
          if (pend[i] && !(take_mon && IW'(i) == mi)) begin
            if (mon_drop_cnt != '1) mon_drop_cnt <= mon_drop_cnt + 1'b1;
          end else begin
            pend[i]  <= 1'b1;
            pdata[i] <= mon[i];
          end
        end
      end
    end
  end
endmodule
