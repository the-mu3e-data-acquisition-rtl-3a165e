// tb_pcie_regs: random PC reads and writes on all four BARs and random
// FPGA-side register and memory writes, against a model of the four
// regions: BAR0 written by the FPGA and read by the PC, BAR1 written by
// the PC and seen by the FPGA, BAR2 FPGA->PC memory, BAR3 PC->FPGA memory.
module tb_pcie_regs;
  localparam int NR = 8, AW = 6;
  logic clk = 0, rst = 1;
  logic pc_we = 0, pc_re = 0, pc_rvalid, pc_wr_stb;
  logic [1:0] pc_bar = 0, pc_wr_bar;
  logic [AW-1:0] pc_addr = 0, pc_wr_addr, fpga_mem_addr = 0, fpga_rd_addr = 0;
  logic [31:0] pc_wdata = 0, pc_rdata, pc_wr_data, fpga_reg_wdata = 0, fpga_mem_wdata = 0, fpga_rd_data;
  logic fpga_reg_we = 0, fpga_mem_we = 0;
  logic [$clog2(NR)-1:0] fpga_reg_addr = 0;
  logic [31:0] pc_regs [NR];
  int checks = 0, failures = 0;
  logic [31:0] m0 [NR], m1 [NR], m2 [1 << AW], m3 [1 << AW];
  pcie_regs #(.NREG(NR), .MEM_AW(AW)) dut (.*);
  always #4 clk = ~clk;
  initial begin
    #10000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask
  initial begin
    for (int i = 0; i < NR; i++) begin m0[i] = 0; m1[i] = 0; end
    for (int i = 0; i < (1 << AW); i++) begin m2[i] = 0; m3[i] = 0; end
    repeat (3) @(posedge clk); #1 rst = 0;
    // BAR2/3 have no reset: initialise through writes
    for (int i = 0; i < (1 << AW); i++) begin
      pc_we = 1; pc_bar = 3; pc_addr = AW'(i); pc_wdata = 0;
      fpga_mem_we = 1; fpga_mem_addr = AW'(i); fpga_mem_wdata = 0;
      @(posedge clk); #1;
    end
    pc_we = 0; fpga_mem_we = 0;
    for (int n = 0; n < 3000; n++) begin
      int op; logic [31:0] exp_r; bit do_rd;
      op = $urandom % 4;
      pc_bar = 2'($urandom); pc_addr = AW'($urandom); pc_wdata = $urandom;
      pc_we = (op == 0); pc_re = (op == 1); do_rd = pc_re;
      fpga_reg_we = ($urandom % 3) == 0; fpga_reg_addr = $urandom; fpga_reg_wdata = $urandom;
      fpga_mem_we = ($urandom % 3) == 0; fpga_mem_addr = AW'($urandom); fpga_mem_wdata = $urandom;
      fpga_rd_addr = AW'($urandom);
      case (pc_bar)
        0: exp_r = m0[pc_addr[2:0]];
        1: exp_r = m1[pc_addr[2:0]];
        2: exp_r = m2[pc_addr];
        default: exp_r = m3[pc_addr];
      endcase
      begin
        logic [31:0] exp_f; exp_f = m3[fpga_rd_addr];
        @(posedge clk);
        // model update with the values present at the clock edge
        if (fpga_reg_we) m0[fpga_reg_addr] = fpga_reg_wdata;
        if (pc_we && pc_bar == 1) m1[pc_addr[2:0]] = pc_wdata;
        if (fpga_mem_we) m2[fpga_mem_addr] = fpga_mem_wdata;
        if (pc_we && pc_bar == 3) m3[pc_addr] = pc_wdata;
        #1;
        check(fpga_rd_data == exp_f, "BAR3 FPGA-side read");
        check(pc_rvalid == do_rd, "read valid");
        if (do_rd) check(pc_rdata == exp_r, $sformatf("PC read bar %0d addr %0d: %h want %h", pc_bar, pc_addr, pc_rdata, exp_r));
        check(pc_wr_stb == pc_we && (!pc_we || (pc_wr_bar == pc_bar && pc_wr_addr == pc_addr && pc_wr_data == pc_wdata)),
              "write strobe");
        for (int i = 0; i < NR; i++) check(pc_regs[i] == m1[i], "BAR1 seen by FPGA");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
