// tb_front_end_board: a pixel front-end board with 4 ASIC links (sorter:
// 64 slots, 3 hits per slot and link, 40 clocks delay). The reset stream
// comes from reset_stream_tx, the ASIC links from one enc8b10b per link.
// The test prepares a run, resets the time stamps, starts the run, loads
// the time-walk table, sends random hits (time stamps a few bins in the
// past, as from a chip) and monitoring packets, then stops the run and
// sends more hits. Checks: every hit sent during the run appears once, in
// the frame of its corrected time stamp, with the right chip, column,
// row, ToT and bin; hits after RUN_STOP do not appear; frame trailers
// count up without gaps; monitoring words arrive; a corrupted symbol on
// link 3 raises only link_err[3].
module tb_front_end_board;
  import daq_pkg::*;
  localparam int N = 4;
  logic clk = 0, rst = 1;
  logic rs_cmd_valid = 0, rs_cmd_ready;
  logic [7:0] rs_cmd = 0;
  logic [9:0] rs_sym, asic_sym [N], enc_sym [N];
  logic [7:0] ad [N];
  logic [N-1:0] ak;
  logic cfg_we = 0;
  logic [5:0] cfg_link = 0;
  logic [4:0] cfg_addr = 0;
  logic [3:0] cfg_data = 0;
  logic link_valid, running;
  lword_t link_word;
  logic [N-1:0] link_err;
  logic [15:0] late_cnt, overflow_cnt, mon_drop_cnt, suppressed_cnt, rs_err;
  int checks = 0, failures = 0;
  bit corrupt = 0;

  reset_stream_tx u_rstx (.clk, .rst, .cmd_valid(rs_cmd_valid), .cmd(rs_cmd), .cmd_ready(rs_cmd_ready), .sym(rs_sym));
  for (genvar g = 0; g < N; g++) begin : g_enc
    enc8b10b u_enc (.clk, .rst, .en(1'b1), .d(ad[g]), .k(ak[g]), .sym(enc_sym[g]));
    assign asic_sym[g] = (g == 3 && corrupt) ? ~enc_sym[g] : enc_sym[g];
  end
  front_end_board #(.DET(DET_PIXEL), .N_LINKS(N), .SLOT_LOG2(6), .DEPTH(3), .DELAY(40)) dut (.*);

  always #4 clk = ~clk;
  initial begin
    #100000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  // byte queues per link; idle K28.5 when empty
  logic [8:0] bq [N][$];
  always @(posedge clk) for (int g = 0; g < N; g++) begin
    if (bq[g].size() > 0) begin logic [8:0] b; b = bq[g].pop_front(); ak[g] <= b[8]; ad[g] <= b[7:0]; end
    else begin ak[g] <= 1'b1; ad[g] <= K28_5; end
  end
  initial for (int g = 0; g < N; g++) begin ak[g] = 1; ad[g] = K28_5; end

  task automatic rs_send(input logic [7:0] c);
    #1 rs_cmd_valid = 1; rs_cmd = c;
    do @(posedge clk); while (!rs_cmd_ready);
    #1 rs_cmd_valid = 0;
    repeat (10) @(posedge clk);
  endtask

  // expected words per frame (frame = corrected time stamp >> 3)
  int exp_n [int];
  logic [31:0] exp_w [int][$];
  int lut [N][32];
  int n_exp = 0, n_hits_out = 0, n_mon_out = 0, n_mon_sent = 0, last_frame = -1, n_trl = 0;
  logic [31:0] cur [$];
  bit stray = 0;
  always @(posedge clk) if (!rst && link_valid) begin
    if (link_word.k) begin
      int f; f = int'(link_word.data[23:0]);
      if (last_frame >= 0) check(f == last_frame + 1, $sformatf("trailer %0d after %0d", f, last_frame));
      last_frame = f; n_trl++;
      foreach (cur[i]) begin
        int idx; bit found; found = 0;
        if (exp_w.exists(f)) begin
          for (int j = 0; j < exp_w[f].size(); j++) if (exp_w[f][j] == cur[i]) begin
            found = 1; exp_w[f].delete(j); break;
          end
        end
        check(found, $sformatf("hit %h in frame %0d not expected", cur[i], f));
        n_hits_out++;
      end
      cur.delete();
    end else if (link_word.data[31:30] == W_MON) n_mon_out++;
    else cur.push_back(link_word.data);
  end

  task automatic send_hits(input int cycles, input bit expect_out);
    repeat (cycles) begin
      @(posedge clk);
      for (int g = 0; g < N; g++) if (bq[g].size() == 0 && ($urandom % 8) == 0) begin
        if (($urandom % 6) == 0) begin
          logic [15:0] m; m = 16'($urandom);
          bq[g].push_back({1'b1, K28_3}); bq[g].push_back({1'b0, m[15:8]}); bq[g].push_back({1'b0, m[7:0]});
          n_mon_sent++;
        end else begin
          int d, ts; logic [31:0] w; logic [7:0] col, row; logic [4:0] tot; hit_t h;
          d = $urandom % 6; col = 8'($urandom); row = 8'($urandom); tot = 5'($urandom);
          ts = int'(dut.ts_now) - d;
          w = {10'(ts), col, row, tot, 1'b0};
          w[0] = ^w[31:1];
          bq[g].push_back({1'b1, K28_0});
          for (int b = 3; b >= 0; b--) bq[g].push_back({1'b0, w[8*b +: 8]});
          if (expect_out) begin
            h = '{ts: 16'(ts - lut[g][tot]), chip: 6'(g), col: col, row: row, tot: tot};
            exp_w[int'(h.ts >> FRAME_LOG2)].push_back(pix_word(h));
            n_exp++;
          end
        end
      end
    end
    repeat (12) @(posedge clk);   // packets in flight
  endtask

  initial begin
    repeat (5) @(posedge clk); #1 rst = 0;
    repeat (20) @(posedge clk);
    check(!running, "not running after reset");
    for (int g = 0; g < N; g++) for (int t = 0; t < 32; t++) begin
      lut[g][t] = (31 - t) / 8;                 // shorter pulses come later
      #1 cfg_we = 1; cfg_link = 6'(g); cfg_addr = 5'(t); cfg_data = 4'(lut[g][t]);
      @(posedge clk);
    end
    #1 cfg_we = 0;
    rs_send(RS_RUN_PREPARE);
    rs_send(RS_RESET);
    check(dut.ts_now < 16, "time stamp restarted");
    last_frame = -1;
    rs_send(RS_RUN_START);
    check(running, "running after RUN_START");
    repeat (80) @(posedge clk);
    send_hits(3000, 1);
    rs_send(RS_RUN_STOP);
    check(!running, "stopped after RUN_STOP");
    send_hits(500, 0);
    repeat (300) @(posedge clk);
    check(n_hits_out == n_exp && n_exp > 500, $sformatf("hits out %0d of %0d", n_hits_out, n_exp));
    check(late_cnt == 0 && overflow_cnt == 0, "no late or overflowing hits at this rate");
    check(n_mon_out + mon_drop_cnt == n_mon_sent && n_mon_out > 50,
          $sformatf("monitoring %0d + %0d dropped of %0d", n_mon_out, mon_drop_cnt, n_mon_sent));
    check(n_trl > 400, "frames closed");
    check(link_err == 0 && rs_err == 0, "clean links");
    @(posedge clk); #1 corrupt = 1; @(posedge clk); #1 corrupt = 0;
    repeat (10) @(posedge clk);
    check(link_err == 4'b1000, $sformatf("link_err %b after corrupting link 3", link_err));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
