// tb_dma_engine: a small ring (64 words, 4-word blocks) in a model of host
// memory, a host that reads the ring only up to the write pointer it last
// received and then moves its read pointer on at random times, and random
// back-pressure on the write port. Checks: data arrive in order at
// ring_base + 4*index, a pointer write follows each complete block, the
// engine never overwrites words the host has not read, and it stalls when
// the host stops reading.
module tb_dma_engine;
  localparam int DW = 32, RL = 6, BL = 2;
  logic clk = 0, rst = 1, enable = 0, in_valid = 0, in_ready, hw_valid, hw_ready = 1;
  logic [63:0] ring_base = 64'h1000_0000, ctrl_addr = 64'h2000_0000, hw_addr;
  logic [RL-1:0] rd_ptr = 0, wr_ptr;
  logic [DW-1:0] in_data = 0, hw_data;
  logic [31:0] blocks_done;
  int checks = 0, failures = 0;
  dma_engine #(.DW(DW), .RING_LOG2(RL), .BLOCK_LOG2(BL)) dut (.*);
  always #4 clk = ~clk;
  initial begin
    #10000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  logic [31:0] ring [1 << RL];
  int n_data = 0, host_wp = 0, host_rd = 0, n_ctrl = 0, host_words = 0;
  bit host_stop = 0;
  always @(posedge clk) begin
    hw_ready <= ($urandom % 4) != 0;
    if (hw_valid && hw_ready) begin
      if (hw_addr == ctrl_addr) begin
        n_ctrl++;
        check(hw_data % (1 << BL) == 0 && hw_data == (n_data % (1 << RL)), "pointer after complete block");
        host_wp = n_data;
      end else begin
        int idx;
        idx = (hw_addr - ring_base) / 4;
        check(idx == n_data % (1 << RL), "data address");
        check(n_data - host_rd < (1 << RL), "no overwrite of unread words");
        ring[idx] = hw_data;
        n_data++;
      end
    end
    // host reads what it was told about
    if (!host_stop && host_rd < host_wp && ($urandom % 3) == 0) begin
      check(ring[host_rd % (1 << RL)] == 32'(host_rd * 7 + 3), "host reads data in order");
      host_rd++; host_words++;
      rd_ptr <= RL'(host_rd);
    end
  end

  int sent = 0;
  initial begin
    repeat (3) @(posedge clk); #1 rst = 0; enable = 1;
    fork
      begin
        while (sent < 2000) begin
          #1 in_valid = ($urandom % 2) != 0; in_data = 32'(sent * 7 + 3);
          @(posedge clk);
          if (in_valid && in_ready) sent++;
        end
        #1 in_valid = 0;
      end
      begin
        repeat (1500) @(posedge clk);
        host_stop = 1;
        repeat (300) @(posedge clk);
        check(n_data - host_rd <= (1 << RL) - 1 && n_data - host_rd >= (1 << RL) - 2 * (1 << BL),
              $sformatf("stalled with ring full: %0d unread", n_data - host_rd));
        check(!in_ready || !enable, "input stalled");
        host_stop = 0;
      end
    join
    repeat (3000) @(posedge clk);
    check(n_data == 2000, $sformatf("%0d words written", n_data));
    check(host_words == 2000, $sformatf("host read %0d", host_words));
    check(blocks_done == 2000 / (1 << BL) && n_ctrl == 2000 / (1 << BL), "one pointer update per block");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
