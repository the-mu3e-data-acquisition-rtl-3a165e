// front_end_board: data path of the front-end board FPGA (Arria V), one
// firmware for all sub-detectors. Per board:
//   reset stream  -> reset_stream_rx -> time stamp counter reset, run state
//   N_LINKS ASIC links -> asic_link_rx (8b/10b decoding, link monitoring,
//                         hit/monitor separation, time stamp extension)
//   pixel boards:  -> timewalk_corr per link -> hit_sorter
//   fibre boards:  -> hit_sorter -> fibre_cluster
//   tile boards:   -> hit_sorter
//   -> feb_link_tx (64 ns frames, monitoring interleaved) -> optical link
// The board time stamp counts 125 MHz clocks and restarts at the reset
// stream's RESET datagram, on the same clock edge on every board; the
// sorter restarts with it. Hits enter the sorter only while the run state
// is RUNNING; frames are closed all the time. The time-walk table is
// written through cfg_* (in the real system from the 6.25 Gbit/s control
// link, which is not modelled). Status outputs: a per-link error flag
// (any 8b/10b, parity or protocol error counted), the reset-stream error
// count and the drop counters.
module front_end_board #(
  parameter daq_pkg::det_t DET = daq_pkg::DET_PIXEL,
  parameter int N_LINKS   = 36,
  parameter int SLOT_LOG2 = 8,
  parameter int DEPTH     = 4,
  parameter int DELAY     = 64
) (
  input  logic            clk,
  input  logic            rst,
  input  logic [9:0]      rs_sym,
  input  logic [9:0]      asic_sym [N_LINKS],
  input  logic            cfg_we,
  input  logic [5:0]      cfg_link,
  input  logic [4:0]      cfg_addr,
  input  logic [3:0]      cfg_data,
  output logic            link_valid,
  output daq_pkg::lword_t link_word,
  output logic            running,
  output logic [N_LINKS-1:0] link_err,
  output logic [15:0]     late_cnt,
  output logic [15:0]     overflow_cnt,
  output logic [15:0]     mon_drop_cnt,
  output logic [15:0]     suppressed_cnt,
  output logic [15:0]     rs_err
);
  import daq_pkg::*;
  logic            ts_reset, rs_cmd_valid, srst;
  logic [7:0]      rs_cmd;
  logic [TS_W-1:0] ts_now;

  reset_stream_rx u_rs (.clk, .rst, .sym(rs_sym), .ts_reset, .running,
                        .cmd_valid(rs_cmd_valid), .cmd(rs_cmd), .link_err(rs_err));

  always_ff @(posedge clk) begin
    if (rst || ts_reset) ts_now <= '0;
    else                 ts_now <= ts_now + 1'b1;
  end
  assign srst = rst || ts_reset;

  logic [N_LINKS-1:0] rx_valid, s_valid, mon_valid;
  hit_t               rx_hit [N_LINKS];
  hit_t               s_hit  [N_LINKS];
  logic [15:0]        mon    [N_LINKS];

  for (genvar g = 0; g < N_LINKS; g++) begin : g_link
    logic [15:0] ce, de, pe, pr;
    asic_link_rx #(.CHIP(6'(g))) u_rx (
      .clk, .rst, .sym(asic_sym[g]), .ts_now, .hit_valid(rx_valid[g]), .hit(rx_hit[g]),
      .mon_valid(mon_valid[g]), .mon(mon[g]), .code_err_cnt(ce), .disp_err_cnt(de),
      .parity_err_cnt(pe), .proto_err_cnt(pr));
    assign link_err[g] = (ce | de | pe | pr) != '0;
    if (DET == DET_PIXEL) begin : g_tw
      logic tw_valid;
      timewalk_corr u_tw (
        .clk, .rst, .cfg_we(cfg_we && cfg_link == 6'(g)), .cfg_addr, .cfg_data,
        .in_valid(rx_valid[g]), .in_hit(rx_hit[g]), .out_valid(tw_valid), .out_hit(s_hit[g]));
      assign s_valid[g] = tw_valid && running;
    end else begin : g_notw
      assign s_valid[g] = rx_valid[g] && running;
      assign s_hit[g]   = rx_hit[g];
    end
  end

  logic  so_valid, so_ready, so_is_hit, so_slot_end, so_frame_end;
  hit_t  so_hit;
  hit_sorter #(.N_IN(N_LINKS), .SLOT_LOG2(SLOT_LOG2), .DEPTH(DEPTH), .DELAY(DELAY)) u_sort (
    .clk, .rst(srst), .ts_now, .in_valid(s_valid), .in_hit(s_hit),
    .out_valid(so_valid), .out_ready(so_ready), .out_hit(so_hit), .out_is_hit(so_is_hit),
    .out_slot_end(so_slot_end), .out_frame_end(so_frame_end), .late_cnt, .overflow_cnt);

  logic  it_valid, it_ready;
  item_t it;
  if (DET == DET_FIBRE) begin : g_fib
    fibre_cluster u_clu (
      .clk, .rst(srst), .in_valid(so_valid), .in_ready(so_ready), .in_hit(so_hit),
      .in_is_hit(so_is_hit), .in_slot_end(so_slot_end), .in_frame_end(so_frame_end),
      .out_valid(it_valid), .out_ready(it_ready), .out_item(it), .suppressed_cnt);
  end else begin : g_nofib
    assign it_valid = so_valid;
    assign so_ready = it_ready;
    assign it = '{has_word: so_is_hit, word: pix_word(so_hit), frame_end: so_frame_end,
                  frame: 24'(so_hit.ts >> FRAME_LOG2)};
    assign suppressed_cnt = '0;
  end

  feb_link_tx #(.N_MON(N_LINKS)) u_tx (
    .clk, .rst, .in_valid(it_valid), .in_ready(it_ready), .in_item(it),
    .mon_valid, .mon, .out_valid(link_valid), .out_word(link_word), .mon_drop_cnt);
endmodule
