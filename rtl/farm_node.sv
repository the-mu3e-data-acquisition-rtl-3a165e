// farm_node: FPGA data path of one filter-farm PC's receiving board
// (DE5aNET, Arria 10). The links from the switching boards are received
// and time-aligned frame by frame (stream_merger). farm_buffer keeps a
// frame locally if there is room and otherwise forwards it to the next PC
// of the daisy chain (fwd_*). From each kept frame the central-pixel hits
// are transformed to global coordinates (coord_transform) and written by
// DMA into a host ring buffer (host_a_*, 128-bit words {hit, x, y, z});
// the GPU selection is not part of the FPGA. The PC returns one decision
// per kept frame by writing BAR1 reg 8 (bit 0: keep); kept frames are
// read out of the buffer and written by a second DMA engine into another
// host ring (host_b_*, 64-bit words {31'b0, k, word}).
// Register map (pcie_regs): BAR1 reg 0 link disable mask, reg 9 bit 0/1
// DMA A/B enable, regs 16..20 DMA A {base lo, base hi, ctrl lo, ctrl hi,
// read pointer}, regs 24..28 the same for DMA B; BAR3 writes load the
// coordinate table at address {sensor, index}; BAR0 regs 0..7 frames
// kept, frames forwarded, truncated words, blocks A, blocks B, write
// pointer A, write pointer B, frame mismatches (written round-robin).
module farm_node #(
  parameter int N_LINK     = 16,
  parameter int FIFO_DEPTH = 64,
  parameter int BUF_LOG2   = 16,
  parameter int MAX_FRAME  = 1024,
  parameter int RING_LOG2  = 20
) (
  input  logic            clk,
  input  logic            rst,
  input  logic [N_LINK-1:0] link_valid,
  input  daq_pkg::lword_t link_word [N_LINK],
  output logic            fwd_valid,
  input  logic            fwd_ready,
  output daq_pkg::lword_t fwd_word,
  output logic            host_a_valid,
  input  logic            host_a_ready,
  output logic [63:0]     host_a_addr,
  output logic [127:0]    host_a_data,
  output logic            host_b_valid,
  input  logic            host_b_ready,
  output logic [63:0]     host_b_addr,
  output logic [63:0]     host_b_data,
  input  logic            pc_we,
  input  logic            pc_re,
  input  logic [1:0]      pc_bar,
  input  logic [15:0]     pc_addr,
  input  logic [31:0]     pc_wdata,
  output logic            pc_rvalid,
  output logic [31:0]     pc_rdata
);
  import daq_pkg::*;
  logic [31:0] pc_regs [64];
  logic        pc_wr_stb;
  logic [1:0]  pc_wr_bar;
  logic [15:0] pc_wr_addr;
  logic [31:0] pc_wr_data;

  logic        m_valid, m_ready;
  lword_t      m_word;
  logic [15:0] mismatch_cnt, ovf_cnt;
  logic [31:0] frame_cnt;
  stream_merger #(.N_IN(N_LINK), .FIFO_DEPTH(FIFO_DEPTH)) u_merge (
    .clk, .rst, .en_mask(~N_LINK'(pc_regs[0])), .in_valid(link_valid), .in_word(link_word),
    .out_valid(m_valid), .out_ready(m_ready), .out_word(m_word), .out_src(),
    .mismatch_cnt, .ovf_cnt, .frame_cnt);

  // selection decisions from the PC, queued
  logic sel_w, sel_valid, sel_keep, sel_ready;
  logic [15:0] sel_ovf;
  assign sel_w = pc_wr_stb && pc_wr_bar == 2'd1 && pc_wr_addr == 16'd8;
  sync_fifo #(.W(1), .DEPTH(64)) u_sel (
    .clk, .rst, .wr_en(sel_w), .wr_data(pc_wr_data[0]), .rd_en(sel_ready),
    .rd_valid(sel_valid), .rd_data(sel_keep), .ovf_cnt(sel_ovf));

  logic   h_valid, h_ready, r_valid, r_ready;
  lword_t h_word, r_word;
  logic [31:0] frames_local, frames_fwd;
  logic [15:0] trunc_cnt;
  farm_buffer #(.BUF_LOG2(BUF_LOG2), .MAX_FRAME(MAX_FRAME)) u_buf (
    .clk, .rst, .in_valid(m_valid), .in_ready(m_ready), .in_word(m_word),
    .fwd_valid, .fwd_ready, .fwd_word,
    .hit_valid(h_valid), .hit_ready(h_ready), .hit_word(h_word),
    .sel_valid, .sel_keep, .sel_ready,
    .ro_valid(r_valid), .ro_ready(r_ready), .ro_word(r_word),
    .frames_local, .frames_fwd, .trunc_cnt);

  logic         c_valid, c_ready;
  logic [127:0] c_data;
  coord_transform u_coord (
    .clk, .rst, .cfg_we(pc_wr_stb && pc_wr_bar == 2'd3), .cfg_addr(pc_wr_addr),
    .cfg_data(pc_wr_data), .in_valid(h_valid), .in_ready(h_ready), .in_word(h_word),
    .out_valid(c_valid), .out_ready(c_ready), .out_data(c_data));

  logic [RING_LOG2-1:0] wp_a, wp_b;
  logic [31:0]          blk_a, blk_b;
  dma_engine #(.DW(128), .RING_LOG2(RING_LOG2)) u_dma_a (
    .clk, .rst, .enable(pc_regs[9][0]), .ring_base({pc_regs[17], pc_regs[16]}),
    .ctrl_addr({pc_regs[19], pc_regs[18]}), .rd_ptr(RING_LOG2'(pc_regs[20])),
    .in_valid(c_valid), .in_ready(c_ready), .in_data(c_data),
    .hw_valid(host_a_valid), .hw_ready(host_a_ready), .hw_addr(host_a_addr),
    .hw_data(host_a_data), .wr_ptr(wp_a), .blocks_done(blk_a));

  dma_engine #(.DW(64), .RING_LOG2(RING_LOG2)) u_dma_b (
    .clk, .rst, .enable(pc_regs[9][1]), .ring_base({pc_regs[25], pc_regs[24]}),
    .ctrl_addr({pc_regs[27], pc_regs[26]}), .rd_ptr(RING_LOG2'(pc_regs[28])),
    .in_valid(r_valid), .in_ready(r_ready), .in_data({31'd0, r_word}),
    .hw_valid(host_b_valid), .hw_ready(host_b_ready), .hw_addr(host_b_addr),
    .hw_data(host_b_data), .wr_ptr(wp_b), .blocks_done(blk_b));

  logic [5:0]  reg_addr;
  logic [31:0] reg_wdata;
  always_ff @(posedge clk) begin
    if (rst) reg_addr <= '0;
    else     reg_addr <= (reg_addr == 6'd7) ? '0 : reg_addr + 1'b1;
  end
  always_comb begin
    unique case (reg_addr)
      6'd0: reg_wdata = frames_local;
      6'd1: reg_wdata = frames_fwd;
      6'd2: reg_wdata = 32'(trunc_cnt);
      6'd3: reg_wdata = blk_a;
      6'd4: reg_wdata = blk_b;
      6'd5: reg_wdata = 32'(wp_a);
      6'd6: reg_wdata = 32'(wp_b);
      default: reg_wdata = 32'(mismatch_cnt);
    endcase
  end

  pcie_regs u_pcie (
    .clk, .rst, .pc_we, .pc_re, .pc_bar, .pc_addr, .pc_wdata, .pc_rvalid, .pc_rdata,
    .pc_wr_stb, .pc_wr_bar, .pc_wr_addr, .pc_wr_data,
    .fpga_reg_we(1'b1), .fpga_reg_addr(reg_addr), .fpga_reg_wdata(reg_wdata), .pc_regs,
    .fpga_mem_we(1'b0), .fpga_mem_addr('0), .fpga_mem_wdata('0),
    .fpga_rd_addr('0), .fpga_rd_data());
endmodule
