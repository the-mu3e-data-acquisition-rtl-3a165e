// tb_mu3e_daq_top: end-to-end test of the readout slice at reduced size:
// 2 pixel front-end boards with 4 ASIC links each, 2 fibre boards (one per
// fibre end) with 2 MuTRiG links each, 3 farm links (the third, from
// outside the slice, switched off over BAR1), sorter of 64 slots x 2 hits,
// farm buffer of 512 words, host rings of 256 words.
// Stimulus: the clock/reset box prepares a run, resets the time stamps and
// starts the run; ASIC models (one enc8b10b per link) send hits and
// monitoring packets; a PC model sets up the farm node, reads ring A,
// returns a keep (even frames) or drop decision per frame, pauses once
// so that the buffer fills, and reads ring B.
// Every mechanism is counted and the test fails if one never happens:
// run start, hits reaching the host with coordinates, sorter overflow,
// late hits, fibre cluster suppression, end-to-end coincidence,
// monitoring into BAR memory, hit map, frames kept / dropped / forwarded
// on the daisy chain, DMA pointer writes, and no hits after RUN_STOP.
module tb_mu3e_daq_top;
  import daq_pkg::*;
  localparam int NPF = 2, NPL = 4, NFF = 2, NFL = 2, NFARM = 3, RL = 8;
  logic clk = 0, rst = 1;
  logic rs_cmd_valid = 0, rs_cmd_ready;
  logic [7:0] rs_cmd = 0;
  logic [9:0] pix_sym [NPF][NPL];
  logic [9:0] fib_sym [NFF][NFL];
  logic tw_cfg_we = 0;
  logic [5:0] tw_cfg_feb = 0, tw_cfg_link = 0;
  logic [4:0] tw_cfg_addr = 0;
  logic [3:0] tw_cfg_data = 0;
  logic [NPF-1:0] pix_running, pix_link_err_any;
  logic [NFF-1:0] fib_link_err_any;
  logic [15:0] pix_overflow [NPF], pix_late [NPF], fib_suppressed [NFF];
  logic [NFARM-3:0] farm_ext_valid = 0;
  lword_t farm_ext_word [NFARM-2];
  logic fwd_valid, fwd_ready = 1;
  lword_t fwd_word;
  logic host_a_valid, host_a_ready = 1, host_b_valid, host_b_ready = 1;
  logic [63:0] host_a_addr, host_b_addr, host_b_data;
  logic [127:0] host_a_data;
  logic [2:0] pc_we = 0, pc_re = 0, pc_rvalid;
  logic [1:0] pc_bar [3];
  logic [15:0] pc_addr [3];
  logic [31:0] pc_wdata [3], pc_rdata [3];
  logic [11:0] hist_rd_addr = 0;
  logic [31:0] hist_rd_data;
  logic [15:0] cfg_rd_addr [2];
  logic [31:0] cfg_rd_data [2];
  int checks = 0, failures = 0;

  mu3e_daq_top #(.N_PIX_FEB(NPF), .N_PIX_LINKS(NPL), .N_FIB_FEB(NFF), .N_FIB_LINKS(NFL),
                 .N_FARM_LINKS(NFARM), .SLOT_LOG2(6), .DEPTH(2), .DELAY(40), .FIFO_DEPTH(64),
                 .BUF_LOG2(9), .MAX_FRAME(64), .RING_LOG2(RL)) dut (.*);

  always #4 clk = ~clk;
  initial begin
    #200000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask
  function automatic real fval(input logic [31:0] b);
    int e; real m;
    if (b[30:0] == 0) return 0.0;
    e = int'(b[30:23]) - 127;
    m = 1.0 + real'(b[22:0]) / 8388608.0;
    return (b[31] ? -m : m) * (2.0 ** e);
  endfunction

  // ASIC models: byte queues, one encoder per link, idle K28.5
  logic [8:0] pq [NPF][NPL][$];
  logic [8:0] fq [NFF][NFL][$];
  logic [7:0] pd [NPF][NPL], fd [NFF][NFL];
  logic       pk [NPF][NPL], fk [NFF][NFL];
  for (genvar b = 0; b < NPF; b++) for (genvar l = 0; l < NPL; l++) begin : g_pe
    enc8b10b u_enc (.clk, .rst, .en(1'b1), .d(pd[b][l]), .k(pk[b][l]), .sym(pix_sym[b][l]));
  end
  for (genvar b = 0; b < NFF; b++) for (genvar l = 0; l < NFL; l++) begin : g_fe
    enc8b10b u_enc (.clk, .rst, .en(1'b1), .d(fd[b][l]), .k(fk[b][l]), .sym(fib_sym[b][l]));
  end
  always @(posedge clk) begin
    for (int b = 0; b < NPF; b++) for (int l = 0; l < NPL; l++)
      if (pq[b][l].size() > 0) begin logic [8:0] x; x = pq[b][l].pop_front(); pk[b][l] <= x[8]; pd[b][l] <= x[7:0]; end
      else begin pk[b][l] <= 1'b1; pd[b][l] <= K28_5; end
    for (int b = 0; b < NFF; b++) for (int l = 0; l < NFL; l++)
      if (fq[b][l].size() > 0) begin logic [8:0] x; x = fq[b][l].pop_front(); fk[b][l] <= x[8]; fd[b][l] <= x[7:0]; end
      else begin fk[b][l] <= 1'b1; fd[b][l] <= K28_5; end
  end
  initial begin
    for (int b = 0; b < NPF; b++) for (int l = 0; l < NPL; l++) begin pk[b][l] = 1; pd[b][l] = K28_5; end
    for (int b = 0; b < NFF; b++) for (int l = 0; l < NFL; l++) begin fk[b][l] = 1; fd[b][l] = K28_5; end
    for (int i = 0; i < 3; i++) begin pc_bar[i] = 0; pc_addr[i] = 0; pc_wdata[i] = 0; end
    for (int i = 0; i < 2; i++) cfg_rd_addr[i] = 0;
    farm_ext_word[0] = '0;
  end

  function automatic logic [31:0] hit_packet_word(input int ts, input logic [7:0] col, input logic [7:0] row,
                                                  input logic [4:0] tot);
    logic [31:0] w;
    w = {10'(ts), col, row, tot, 1'b0};
    w[0] = ^w[31:1];
    return w;
  endfunction
  task automatic push_hit(inout logic [8:0] q [$], input logic [31:0] w);
    q.push_back({1'b1, K28_0});
    for (int i = 3; i >= 0; i--) q.push_back({1'b0, w[8*i +: 8]});
  endtask
  function automatic int ts_now();
    return int'(dut.g_pfeb[0].u_feb.ts_now);
  endfunction

  // mechanism counters
  int m_run_start = 0, m_hits_host = 0, m_coord_ok = 0, m_overflow = 0, m_late = 0;
  int m_suppressed = 0, m_coinc = 0, m_mon = 0, m_hitmap = 0, m_kept = 0, m_dropped = 0;
  int m_forwarded = 0, m_ptr_a = 0, m_ptr_b = 0, m_ro_words = 0, m_after_stop = 0;
  bit sent_key [int];          // {board, chip, col, row} of hits sent during the run

  // PC buses
  task automatic pc_write(input int i, input logic [1:0] bar, input int a, input logic [31:0] d);
    #1 pc_we[i] = 1; pc_bar[i] = bar; pc_addr[i] = 16'(a); pc_wdata[i] = d;
    @(posedge clk); #1 pc_we[i] = 0;
  endtask
  task automatic pc_read(input int i, input logic [1:0] bar, input int a, output logic [31:0] d);
    #1 pc_re[i] = 1; pc_bar[i] = bar; pc_addr[i] = 16'(a);
    @(posedge clk); #1 pc_re[i] = 0;
    @(posedge clk); d = pc_rdata[i];
  endtask

  // host memory
  localparam logic [63:0] BASE_A = 64'h1_0000, CTRL_A = 64'h2_0000, BASE_B = 64'h3_0000, CTRL_B = 64'h4_0000;
  logic [127:0] ring_a [1 << RL];
  logic [63:0]  ring_b [1 << RL];
  int wp_a = 0, wp_b = 0, rd_a = 0, rd_b = 0;
  always @(posedge clk) if (!rst) begin
    if (host_a_valid && host_a_ready) begin
      if (host_a_addr == CTRL_A) begin m_ptr_a++; wp_a = int'(host_a_data[RL-1:0]); end
      else ring_a[(host_a_addr - BASE_A) / 16] = host_a_data;
    end
    if (host_b_valid && host_b_ready) begin
      if (host_b_addr == CTRL_B) begin m_ptr_b++; wp_b = int'(host_b_data[RL-1:0]); end
      else ring_b[(host_b_addr - BASE_B) / 8] = host_b_data;
    end
    if (fwd_valid && fwd_ready && fwd_word.k) m_forwarded++;
  end

  bit pc_pause = 0, run_on = 0;
  task automatic farm_poll();
    while (rd_a != wp_a) begin
      logic [127:0] e; logic [31:0] w;
      e = ring_a[rd_a]; w = e[127:96];
      rd_a = (rd_a + 1) % (1 << RL);
      if (w[31:24] == K28_4) begin
        bit keep; keep = (w[0] == 1'b0);
        pc_write(2, 2'd1, 8, 32'(keep));
        if (keep) m_kept++; else m_dropped++;
      end else begin
        int key; key = int'({w[25:22], w[21:16], w[15:8], w[7:0]});
        check(w[30:28] == 3'd0, "ring A carries central pixel hits only");
        check(sent_key.exists(key), $sformatf("hit %h on ring A was sent", w));
        if (w[15:8] == 8'hFF) m_after_stop++;
        m_hits_host++;
        if (fval(e[95:64]) == real'(w[15:8])) m_coord_ok++;
      end
    end
    pc_write(2, 2'd1, 20, 32'(rd_a));
    while (rd_b != wp_b) begin
      rd_b = (rd_b + 1) % (1 << RL);
      m_ro_words++;
    end
    pc_write(2, 2'd1, 28, 32'(rd_b));
  endtask
  initial begin
    @(negedge rst);
    forever begin
      repeat (2 + $urandom % 6) @(posedge clk);
      if (!pc_pause) farm_poll();
    end
  end

  task automatic rs_send(input logic [7:0] c);
    #1 rs_cmd_valid = 1; rs_cmd = c;
    do @(posedge clk); while (!rs_cmd_ready);
    #1 rs_cmd_valid = 0;
    repeat (10) @(posedge clk);
  endtask

  task automatic pixel_traffic(input int cycles, input bit during_run);
    repeat (cycles) begin
      @(posedge clk);
      for (int b = 0; b < NPF; b++) for (int l = 0; l < NPL; l++)
        if (pq[b][l].size() == 0 && ($urandom % 16) == 0) begin
          if (($urandom % 8) == 0) begin
            pq[b][l].push_back({1'b1, K28_3}); pq[b][l].push_back({1'b0, 8'($urandom)});
            pq[b][l].push_back({1'b0, 8'($urandom)});
          end else begin
            logic [7:0] col, row;
            col = during_run ? 8'($urandom % 255) : 8'hFF; row = 8'($urandom);
            push_hit(pq[b][l], hit_packet_word(ts_now() - $urandom % 4, col, row, 5'($urandom)));
            if (during_run) sent_key[int'({4'(b), 6'(l), col, row})] = 1;
          end
        end
    end
  endtask

  initial begin
    logic [31:0] d;
    repeat (5) @(posedge clk); #1 rst = 0;
    repeat (20) @(posedge clk);
    // farm node set-up: third link off, DMA rings, coordinate table x = column
    pc_write(2, 2'd1, 0, 32'h4);
    pc_write(2, 2'd1, 16, BASE_A[31:0]); pc_write(2, 2'd1, 17, 0);
    pc_write(2, 2'd1, 18, CTRL_A[31:0]); pc_write(2, 2'd1, 19, 0);
    pc_write(2, 2'd1, 24, BASE_B[31:0]); pc_write(2, 2'd1, 25, 0);
    pc_write(2, 2'd1, 26, CTRL_B[31:0]); pc_write(2, 2'd1, 27, 0);
    for (int b = 0; b < NPF; b++) for (int c = 0; c < NPL; c++)
      pc_write(2, 2'd3, (b * 64 + c) * 16 + 3, 32'd65536);
    pc_write(2, 2'd1, 9, 32'd3);
    // run control
    rs_send(RS_RUN_PREPARE);
    rs_send(RS_RESET);
    rs_send(RS_RUN_START);
    if (pix_running == '1) m_run_start++;
    run_on = 1;
    repeat (100) @(posedge clk);
    fork
      pixel_traffic(4000, 1);
      begin
        // fibre: a cluster of two adjacent channels (channel = MuTRiG * 32 +
        // MuTRiG channel) at both ends (coincidence) and
        // a single channel at one end (suppressed dark count), every 40 clocks
        repeat (90) begin
          int t; logic [7:0] ch;
          t = ts_now(); ch = 8'($urandom % 30);
          for (int b = 0; b < NFF; b++) begin
            push_hit(fq[b][0], hit_packet_word(t, ch, 8'd0, 5'd3));
            push_hit(fq[b][0], hit_packet_word(t, ch + 8'd1, 8'd0, 5'd3));
          end
          push_hit(fq[0][1], hit_packet_word(t - 2, ch, 8'd0, 5'd3));
          repeat (40) @(posedge clk);
        end
      end
      begin
        // sorter overflow: four hits of one link in one slot (room for two)
        repeat (500) @(posedge clk);
        begin
          int t; t = ts_now();
          for (int i = 0; i < 4; i++) begin
            push_hit(pq[1][2], hit_packet_word(t, 8'(10 + i), 8'd1, 5'd1));
            sent_key[int'({4'd1, 6'd2, 8'(10 + i), 8'd1})] = 1;
          end
        end
        // a late hit: time stamp far behind
        repeat (200) @(posedge clk);
        push_hit(pq[0][1], hit_packet_word(ts_now() - 300, 8'd7, 8'd7, 5'd1));
        // the PC pauses: the farm buffer fills, frames go down the chain
        repeat (500) @(posedge clk);
        pc_pause = 1;
        repeat (1500) @(posedge clk);
        pc_pause = 0;
      end
    join
    repeat (300) @(posedge clk);
    rs_send(RS_RUN_STOP);
    check(pix_running == '0, "run stopped");
    pixel_traffic(500, 0);
    repeat (3000) @(posedge clk);

    m_overflow = pix_overflow[1];
    m_late = pix_late[0];
    m_suppressed = fib_suppressed[0];
    pc_read(1, 2'd0, 4, d); m_coinc = d;
    pc_read(0, 2'd0, 0, d); m_mon = d;
    for (int c = 0; c < NPL; c++) begin
      #1 hist_rd_addr = {6'd0, 6'(c)}; @(posedge clk); #1;
      m_hitmap += hist_rd_data;
    end
    check(pix_link_err_any == 0 && fib_link_err_any == 0, "no link errors");
    check(m_coord_ok == m_hits_host, "coordinates of every host hit");

    $display("mechanisms: run_start=%0d hits_to_host=%0d coord=%0d sorter_overflow=%0d late=%0d",
             m_run_start, m_hits_host, m_coord_ok, m_overflow, m_late);
    $display("            cluster_suppressed=%0d coincidences=%0d monitoring=%0d hitmap=%0d",
             m_suppressed, m_coinc, m_mon, m_hitmap);
    $display("            kept=%0d dropped=%0d forwarded=%0d ptr_a=%0d ptr_b=%0d readout_words=%0d after_stop=%0d",
             m_kept, m_dropped, m_forwarded, m_ptr_a, m_ptr_b, m_ro_words, m_after_stop);
    check(m_run_start > 0, "run start");
    check(m_hits_host > 200, "hits reach the host");
    check(m_overflow > 0, "sorter overflow");
    check(m_late > 0, "late hit");
    check(m_suppressed > 0, "cluster suppression");
    check(m_coinc >= 80, "fibre coincidences");
    check(m_mon > 0, "monitoring to BAR memory");
    check(m_hitmap > 0, "hit map");
    check(m_kept > 0 && m_dropped > 0, "frames kept and dropped");
    check(m_forwarded > 0, "daisy-chain forwarding");
    check(m_ptr_a > 0 && m_ptr_b > 0 && m_ro_words > 0, "DMA pointer writes and readout");
    check(m_after_stop == 0, "no hits after RUN_STOP");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
