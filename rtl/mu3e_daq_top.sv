// mu3e_daq_top: a slice of the Mu3e readout, from the detector ASIC links
// to one filter-farm node, with the synchronisation system:
//   reset_stream_tx (clock and reset box) -> fanned out to every board
//   N_PIX_FEB pixel front-end boards (N_PIX_LINKS ASIC links each)
//       -> central pixel switching board (SWB_ID 0)
//   N_FIB_FEB fibre front-end boards (N_FIB_LINKS MuTRiG links each)
//       -> fibre switching board (SWB_ID 1, end-to-end coincidences)
//   both switching boards -> farm node inputs 0 and 1; the farm node's
//       other N_FARM_LINKS-2 inputs, from switching boards outside the
//       slice, are ports (farm_ext_*)
// Everything runs on the one 125 MHz system clock, as the whole system is
// synchronous to the master clock; the optical links, their transceivers,
// the PCIe hard IP, the DDR4 memory and the ASICs are outside and appear
// as ports: ASIC symbol streams in, PC register buses (index 0 pixel
// switching board, 1 fibre switching board, 2 farm node), host-memory
// write ports and the daisy-chain output out. The time-walk tables of the
// pixel boards are written through tw_cfg_* (standing in for the control
// links). Defaults are the paper's numbers: 34 front-end boards on a
// switching board, 36 links per pixel board, 12 fibre boards with 8
// MuTRiGs each, 16 links into a farm node.
module mu3e_daq_top #(
  parameter int N_PIX_FEB    = 34,
  parameter int N_PIX_LINKS  = 36,
  parameter int N_FIB_FEB    = 12,
  parameter int N_FIB_LINKS  = 8,
  parameter int N_FARM_LINKS = 16,
  parameter int SLOT_LOG2    = 8,
  parameter int DEPTH        = 4,
  parameter int DELAY        = 64,
  parameter int FIFO_DEPTH   = 64,
  parameter int BUF_LOG2     = 16,
  parameter int MAX_FRAME    = 1024,
  parameter int RING_LOG2    = 20
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        rs_cmd_valid,
  input  logic [7:0]  rs_cmd,
  output logic        rs_cmd_ready,
  input  logic [9:0]  pix_sym [N_PIX_FEB][N_PIX_LINKS],
  input  logic [9:0]  fib_sym [N_FIB_FEB][N_FIB_LINKS],
  input  logic        tw_cfg_we,
  input  logic [5:0]  tw_cfg_feb,
  input  logic [5:0]  tw_cfg_link,
  input  logic [4:0]  tw_cfg_addr,
  input  logic [3:0]  tw_cfg_data,
  output logic [N_PIX_FEB-1:0] pix_running,
  output logic [N_PIX_FEB-1:0] pix_link_err_any,
  output logic [N_FIB_FEB-1:0] fib_link_err_any,
  output logic [15:0] pix_overflow [N_PIX_FEB],
  output logic [15:0] pix_late [N_PIX_FEB],
  output logic [15:0] fib_suppressed [N_FIB_FEB],
  input  logic [N_FARM_LINKS-3:0] farm_ext_valid,
  input  daq_pkg::lword_t farm_ext_word [N_FARM_LINKS-2],
  output logic        fwd_valid,
  input  logic        fwd_ready,
  output daq_pkg::lword_t fwd_word,
  output logic        host_a_valid,
  input  logic        host_a_ready,
  output logic [63:0] host_a_addr,
  output logic [127:0] host_a_data,
  output logic        host_b_valid,
  input  logic        host_b_ready,
  output logic [63:0] host_b_addr,
  output logic [63:0] host_b_data,
  input  logic [2:0]  pc_we,
  input  logic [2:0]  pc_re,
  input  logic [1:0]  pc_bar [3],
  input  logic [15:0] pc_addr [3],
  input  logic [31:0] pc_wdata [3],
  output logic [2:0]  pc_rvalid,
  output logic [31:0] pc_rdata [3],
  input  logic [11:0] hist_rd_addr,
  output logic [31:0] hist_rd_data,
  input  logic [15:0] cfg_rd_addr [2],
  output logic [31:0] cfg_rd_data [2]
);
  import daq_pkg::*;
  logic [9:0] rs_sym;
  reset_stream_tx u_rs (.clk, .rst, .cmd_valid(rs_cmd_valid), .cmd(rs_cmd),
                        .cmd_ready(rs_cmd_ready), .sym(rs_sym));

  // pixel front-end boards
  logic [N_PIX_FEB-1:0] p_valid;
  lword_t               p_word [N_PIX_FEB];
  for (genvar f = 0; f < N_PIX_FEB; f++) begin : g_pfeb
    logic [N_PIX_LINKS-1:0] lerr;
    logic [15:0] mdrop, supp, rserr;
    front_end_board #(.DET(DET_PIXEL), .N_LINKS(N_PIX_LINKS), .SLOT_LOG2(SLOT_LOG2),
                      .DEPTH(DEPTH), .DELAY(DELAY)) u_feb (
      .clk, .rst, .rs_sym, .asic_sym(pix_sym[f]),
      .cfg_we(tw_cfg_we && tw_cfg_feb == 6'(f)), .cfg_link(tw_cfg_link),
      .cfg_addr(tw_cfg_addr), .cfg_data(tw_cfg_data),
      .link_valid(p_valid[f]), .link_word(p_word[f]), .running(pix_running[f]),
      .link_err(lerr), .late_cnt(pix_late[f]), .overflow_cnt(pix_overflow[f]),
      .mon_drop_cnt(mdrop), .suppressed_cnt(supp), .rs_err(rserr));
    assign pix_link_err_any[f] = |lerr;
  end

  // fibre front-end boards
  logic [N_FIB_FEB-1:0] f_valid;
  lword_t               f_word [N_FIB_FEB];
  for (genvar f = 0; f < N_FIB_FEB; f++) begin : g_ffeb
    logic [N_FIB_LINKS-1:0] lerr;
    logic [15:0] late, ovf, mdrop, rserr;
    logic        run;
    front_end_board #(.DET(DET_FIBRE), .N_LINKS(N_FIB_LINKS), .SLOT_LOG2(SLOT_LOG2),
                      .DEPTH(DEPTH), .DELAY(DELAY)) u_feb (
      .clk, .rst, .rs_sym, .asic_sym(fib_sym[f]),
      .cfg_we(1'b0), .cfg_link('0), .cfg_addr('0), .cfg_data('0),
      .link_valid(f_valid[f]), .link_word(f_word[f]), .running(run),
      .link_err(lerr), .late_cnt(late), .overflow_cnt(ovf),
      .mon_drop_cnt(mdrop), .suppressed_cnt(fib_suppressed[f]), .rs_err(rserr));
    assign fib_link_err_any[f] = |lerr;
  end

  // switching boards
  logic   sp_valid, sf_valid;
  lword_t sp_word, sf_word;
  logic [31:0] hist_f;
  switching_board #(.N_FEB(N_PIX_FEB), .SWB_ID(3'd0), .FIBRE(1'b0), .FIFO_DEPTH(FIFO_DEPTH)) u_swb_pix (
    .clk, .rst, .feb_valid(p_valid), .feb_word(p_word), .out_valid(sp_valid), .out_word(sp_word),
    .pc_we(pc_we[0]), .pc_re(pc_re[0]), .pc_bar(pc_bar[0]), .pc_addr(pc_addr[0]),
    .pc_wdata(pc_wdata[0]), .pc_rvalid(pc_rvalid[0]), .pc_rdata(pc_rdata[0]),
    .hist_rd_addr, .hist_rd_data, .cfg_rd_addr(cfg_rd_addr[0]), .cfg_rd_data(cfg_rd_data[0]));
  switching_board #(.N_FEB(N_FIB_FEB), .SWB_ID(3'd1), .FIBRE(1'b1), .FIFO_DEPTH(FIFO_DEPTH)) u_swb_fib (
    .clk, .rst, .feb_valid(f_valid), .feb_word(f_word), .out_valid(sf_valid), .out_word(sf_word),
    .pc_we(pc_we[1]), .pc_re(pc_re[1]), .pc_bar(pc_bar[1]), .pc_addr(pc_addr[1]),
    .pc_wdata(pc_wdata[1]), .pc_rvalid(pc_rvalid[1]), .pc_rdata(pc_rdata[1]),
    .hist_rd_addr('0), .hist_rd_data(hist_f), .cfg_rd_addr(cfg_rd_addr[1]),
    .cfg_rd_data(cfg_rd_data[1]));

  // farm node
  logic [N_FARM_LINKS-1:0] fl_valid;
  lword_t                  fl_word [N_FARM_LINKS];
  assign fl_valid = {farm_ext_valid, sf_valid, sp_valid};
  always_comb begin
    fl_word[0] = sp_word;
    fl_word[1] = sf_word;
    for (int i = 2; i < N_FARM_LINKS; i++) fl_word[i] = farm_ext_word[i-2];
  end
  farm_node #(.N_LINK(N_FARM_LINKS), .FIFO_DEPTH(FIFO_DEPTH), .BUF_LOG2(BUF_LOG2),
              .MAX_FRAME(MAX_FRAME), .RING_LOG2(RING_LOG2)) u_farm (
    .clk, .rst, .link_valid(fl_valid), .link_word(fl_word), .fwd_valid, .fwd_ready, .fwd_word,
    .host_a_valid, .host_a_ready, .host_a_addr, .host_a_data,
    .host_b_valid, .host_b_ready, .host_b_addr, .host_b_data,
    .pc_we(pc_we[2]), .pc_re(pc_re[2]), .pc_bar(pc_bar[2]), .pc_addr(pc_addr[2]),
    .pc_wdata(pc_wdata[2]), .pc_rvalid(pc_rvalid[2]), .pc_rdata(pc_rdata[2]));
endmodule
