// pcie_regs: the four Bus-Addressable Register (BAR) areas of the common
// PCIe firmware of all Arria 10 boards, as the paper lists them:
//   BAR0  64 x 32-bit registers written by the FPGA, read by the PC
//   BAR1  64 x 32-bit registers written by the PC, read by the FPGA
//   BAR2  256 KB memory written by the FPGA, read by the PC
//   BAR3  256 KB memory written by the PC, read by the FPGA
// The PC side is a plain word-addressed request port standing in for the
// PCIe hard IP's target interface (a vendor block not modelled here):
// pc_bar selects the area, pc_addr the 32-bit word; a read returns
// pc_rdata with pc_rvalid one clock later; PC writes to BAR0/BAR2 are
// ignored. Every accepted PC write is also shown for one clock on
// pc_wr_* so that logic can react to a register write (a command). The
// FPGA side writes BAR0 and BAR2 with *_we ports, sees BAR1 as a flat
// array and reads BAR3 with one clock latency. BAR1 is cleared by reset;
// the memories are not.
module pcie_regs #(
  parameter int NREG   = 64,
  parameter int MEM_AW = 16      // 2^16 words of 32 bit = 256 KB
) (
  input  logic                    clk,
  input  logic                    rst,
  // PC side
  input  logic                    pc_we,
  input  logic                    pc_re,
  input  logic [1:0]              pc_bar,
  input  logic [MEM_AW-1:0]       pc_addr,
  input  logic [31:0]             pc_wdata,
  output logic                    pc_rvalid,
  output logic [31:0]             pc_rdata,
  output logic                    pc_wr_stb,
  output logic [1:0]              pc_wr_bar,
  output logic [MEM_AW-1:0]       pc_wr_addr,
  output logic [31:0]             pc_wr_data,
  // FPGA side
  input  logic                    fpga_reg_we,
  input  logic [$clog2(NREG)-1:0] fpga_reg_addr,
  input  logic [31:0]             fpga_reg_wdata,
  output logic [31:0]             pc_regs [NREG],
  input  logic                    fpga_mem_we,
  input  logic [MEM_AW-1:0]       fpga_mem_addr,
  input  logic [31:0]             fpga_mem_wdata,
  input  logic [MEM_AW-1:0]       fpga_rd_addr,
  output logic [31:0]             fpga_rd_data
);
  localparam int RW = $clog2(NREG);
  logic [31:0] fpga_regs [NREG];
  logic [31:0] mem_up   [1 << MEM_AW];   // BAR2, FPGA -> PC
  logic [31:0] mem_down [1 << MEM_AW];   // BAR3, PC -> FPGA

  // BAR0
  always_ff @(posedge clk) begin
    if (rst) for (int i = 0; i < NREG; i++) fpga_regs[i] <= '0;
    else if (fpga_reg_we) fpga_regs[fpga_reg_addr] <= fpga_reg_wdata;
  end

  // BAR1
  always_ff @(posedge clk) begin
    if (rst) for (int i = 0; i < NREG; i++) pc_regs[i] <= '0;
    else if (pc_we && pc_bar == 2'd1) pc_regs[pc_addr[RW-1:0]] <= pc_wdata;
  end

  // BAR2 and BAR3
  always_ff @(posedge clk) begin
    if (fpga_mem_we) mem_up[fpga_mem_addr] <= fpga_mem_wdata;
    if (pc_we && pc_bar == 2'd3) mem_down[pc_addr] <= pc_wdata;
    fpga_rd_data <= mem_down[fpga_rd_addr];
  end

  // PC reads
  always_ff @(posedge clk) begin
    if (rst) begin
      pc_rvalid <= 1'b0; pc_rdata <= '0;
    end else begin
      pc_rvalid <= pc_re;
      unique case (pc_bar)
        2'd0: pc_rdata <= fpga_regs[pc_addr[RW-1:0]];
        2'd1: pc_rdata <= pc_regs[pc_addr[RW-1:0]];
        2'd2: pc_rdata <= mem_up[pc_addr];
        default: pc_rdata <= mem_down[pc_addr];
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      pc_wr_stb <= 1'b0; pc_wr_bar <= '0; pc_wr_addr <= '0; pc_wr_data <= '0;
    end else begin
      pc_wr_stb  <= pc_we;
      pc_wr_bar  <= pc_bar;
      pc_wr_addr <= pc_addr;
      pc_wr_data <= pc_wdata;
    end
  end
endmodule
