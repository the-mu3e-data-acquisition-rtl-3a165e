// switching_board: data path of a switching board FPGA (Arria 10 on the
// PCIe40 card). The streams of up to N_FEB front-end boards are
// time-aligned and merged frame by frame (stream_merger). After the merge
//   - monitoring words are written, in order, into the FPGA-writeable
//     256 KB BAR memory (a ring; the next write address is in BAR0 reg 0),
//   - pixel hits feed the hit map (bin = {board, chip}) and are rewritten
//     to the sensor/column/row form for the farm,
//   - on the fibre board (FIBRE = 1) clusters go through the coincidence
//     of the two fibre ends, and only coincidences leave the board.
// The merged stream is one 32-bit word per clock towards the farm; the
// paper's boards spread it over several 10 Gbit/s links, a physical split
// not modelled here. PC access is through pcie_regs:
//   BAR0 reg 0..5: monitoring pointer, frames, frame mismatches, FIFO
//   overflows, coincidences, unpaired clusters (written round-robin);
//   BAR1 reg 0/1: link disable mask (bits 0..31 / 32..63); a write to
//   BAR1 reg 2 clears the hit map; BAR3 is read by the (not modelled)
//   control link through cfg_rd_*.
module switching_board #(
  parameter int         N_FEB      = 34,
  parameter logic [2:0] SWB_ID     = 3'd0,
  parameter bit         FIBRE      = 1'b0,
  parameter int         FIFO_DEPTH = 64
) (
  input  logic            clk,
  input  logic            rst,
  input  logic [N_FEB-1:0] feb_valid,
  input  daq_pkg::lword_t feb_word [N_FEB],
  output logic            out_valid,
  output daq_pkg::lword_t out_word,
  input  logic            pc_we,
  input  logic            pc_re,
  input  logic [1:0]      pc_bar,
  input  logic [15:0]     pc_addr,
  input  logic [31:0]     pc_wdata,
  output logic            pc_rvalid,
  output logic [31:0]     pc_rdata,
  input  logic [11:0]     hist_rd_addr,
  output logic [31:0]     hist_rd_data,
  input  logic [15:0]     cfg_rd_addr,
  output logic [31:0]     cfg_rd_data
);
  import daq_pkg::*;
  logic [31:0] pc_regs [64];
  logic        pc_wr_stb;
  logic [1:0]  pc_wr_bar;
  logic [15:0] pc_wr_addr;
  logic [31:0] pc_wr_data;
  logic        reg_we, mem_we;
  logic [5:0]  reg_addr;
  logic [31:0] reg_wdata;
  logic [15:0] mon_ptr;

  logic [N_FEB-1:0] en_mask;
  assign en_mask = ~N_FEB'({pc_regs[1], pc_regs[0]});

  logic        m_valid, m_ready;
  lword_t      m_word;
  logic [5:0]  m_src;
  logic [15:0] mismatch_cnt, ovf_cnt;
  logic [31:0] frame_cnt;
  stream_merger #(.N_IN(N_FEB), .FIFO_DEPTH(FIFO_DEPTH)) u_merge (
    .clk, .rst, .en_mask, .in_valid(feb_valid), .in_word(feb_word),
    .out_valid(m_valid), .out_ready(m_ready), .out_word(m_word), .out_src(m_src),
    .mismatch_cnt, .ovf_cnt, .frame_cnt);

  logic is_mon, is_pix, is_fib;
  assign is_mon = m_valid && !m_word.k && m_word.data[31:30] == W_MON;
  assign is_pix = m_valid && !m_word.k && m_word.data[31:30] == W_PIX;
  assign is_fib = m_valid && !m_word.k && m_word.data[31:30] == W_FIB;

  // monitoring words into the BAR2 ring
  assign mem_we = is_mon && m_ready;
  always_ff @(posedge clk) begin
    if (rst) mon_ptr <= '0;
    else if (mem_we) mon_ptr <= mon_ptr + 1'b1;
  end

  hit_histogram #(.BIN_W(12)) u_hist (
    .clk, .rst, .clear(pc_wr_stb && pc_wr_bar == 2'd1 && pc_wr_addr == 16'd2), .clearing(),
    .in_valid(is_pix && m_ready), .in_bin({m_src, m_word.data[26:21]}),
    .rd_addr(hist_rd_addr), .rd_data(hist_rd_data));

  logic [31:0] coinc_cnt, single_cnt;
  if (FIBRE) begin : g_fib
    logic   c_ready, c_valid;
    lword_t c_word;
    fibre_coinc #(.N_FEB(N_FEB)) u_coinc (
      .clk, .rst, .in_valid(m_valid && !is_mon), .in_ready(c_ready), .in_word(m_word),
      .in_src(m_src), .out_valid(c_valid), .out_ready(1'b1), .out_word(c_word),
      .coinc_cnt, .single_cnt);
    assign m_ready = c_ready;
    always_ff @(posedge clk) begin
      if (rst) begin out_valid <= 1'b0; out_word <= '0; end
      else begin
        out_valid <= c_valid;
        out_word  <= c_word.k ? c_word : '{k: 1'b0, data: c_word.data};
      end
    end
  end else begin : g_pix
    assign m_ready = 1'b1;
    assign coinc_cnt = '0;
    assign single_cnt = '0;
    always_ff @(posedge clk) begin
      if (rst) begin out_valid <= 1'b0; out_word <= '0; end
      else begin
        out_valid <= m_valid && !is_mon;
        out_word  <= m_word.k ? m_word : '{k: 1'b0, data: swb_word(m_word.data, SWB_ID, m_src)};
      end
    end
  end

  // status registers, one per clock, round robin
  always_ff @(posedge clk) begin
    if (rst) reg_addr <= '0;
    else     reg_addr <= (reg_addr == 6'd5) ? '0 : reg_addr + 1'b1;
  end
  assign reg_we = 1'b1;
  always_comb begin
    unique case (reg_addr)
      6'd0: reg_wdata = 32'(mon_ptr);
      6'd1: reg_wdata = frame_cnt;
      6'd2: reg_wdata = 32'(mismatch_cnt);
      6'd3: reg_wdata = 32'(ovf_cnt);
      6'd4: reg_wdata = coinc_cnt;
      default: reg_wdata = single_cnt;
    endcase
  end

  pcie_regs u_pcie (
    .clk, .rst, .pc_we, .pc_re, .pc_bar, .pc_addr, .pc_wdata, .pc_rvalid, .pc_rdata,
    .pc_wr_stb, .pc_wr_bar, .pc_wr_addr, .pc_wr_data,
    .fpga_reg_we(reg_we), .fpga_reg_addr(reg_addr), .fpga_reg_wdata(reg_wdata), .pc_regs,
    .fpga_mem_we(mem_we), .fpga_mem_addr(mon_ptr), .fpga_mem_wdata(m_word.data),
    .fpga_rd_addr(cfg_rd_addr), .fpga_rd_data(cfg_rd_data));
endmodule
