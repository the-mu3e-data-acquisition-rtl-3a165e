// tb_switching_board: a pixel switching board with 3 front-end inputs and
// a fibre switching board with 4, fed with random frames. Pixel board
// checks: each output frame holds exactly the rewritten pixel words
// {0, board id, source, chip, column, row} of that frame, then one trailer;
// monitoring words land in order in the BAR2 memory and the BAR0 pointer
// counts them; the hit map holds the per-{source, chip} counts and is
// cleared by a BAR1 write; disabling an input through BAR1 removes its
// words. Fibre board checks: only coincidence words and trailers leave
// and the coincidence counter read over BAR0 matches the output.
module tb_switching_board;
  import daq_pkg::*;
  localparam int NP = 3, NF = 4, FRAMES = 120;
  logic clk = 0, rst = 1;
  logic [NP-1:0] p_valid = 0;
  lword_t p_word [NP];
  logic [NF-1:0] f_valid = 0;
  lword_t f_word [NF];
  logic p_out_valid, f_out_valid;
  lword_t p_out, f_out;
  logic pc_we = 0, pc_re = 0, p_rvalid, f_rvalid;
  logic [1:0] pc_bar = 0;
  logic [15:0] pc_addr = 0;
  logic [31:0] pc_wdata = 0, p_rdata, f_rdata, p_hist, f_hist, p_cfg, f_cfg;
  logic [11:0] hist_addr = 0;
  int checks = 0, failures = 0;

  switching_board #(.N_FEB(NP), .SWB_ID(3'd2), .FIBRE(1'b0), .FIFO_DEPTH(64)) u_pix (
    .clk, .rst, .feb_valid(p_valid), .feb_word(p_word), .out_valid(p_out_valid), .out_word(p_out),
    .pc_we, .pc_re, .pc_bar, .pc_addr, .pc_wdata, .pc_rvalid(p_rvalid), .pc_rdata(p_rdata),
    .hist_rd_addr(hist_addr), .hist_rd_data(p_hist), .cfg_rd_addr(16'd0), .cfg_rd_data(p_cfg));
  switching_board #(.N_FEB(NF), .SWB_ID(3'd5), .FIBRE(1'b1), .FIFO_DEPTH(64)) u_fib (
    .clk, .rst, .feb_valid(f_valid), .feb_word(f_word), .out_valid(f_out_valid), .out_word(f_out),
    .pc_we(1'b0), .pc_re, .pc_bar, .pc_addr, .pc_wdata, .pc_rvalid(f_rvalid), .pc_rdata(f_rdata),
    .hist_rd_addr(hist_addr), .hist_rd_data(f_hist), .cfg_rd_addr(16'd0), .cfg_rd_data(f_cfg));

  always #4 clk = ~clk;
  initial begin
    #100000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  logic [31:0] exp_w [FRAMES][$];
  logic [31:0] mon_sent [$];
  int hist [NP][64];
  logic [NP-1:0] dis = 0, at80 = 0;
  bit go80 = 0;
  int n_frames_out = 0, n_fib_coinc = 0, n_fib_trl = 0, n_words = 0;
  logic [31:0] cur [$];
  always @(posedge clk) if (!rst) begin
    if (p_out_valid) begin
      if (p_out.k) begin
        int f; f = int'(p_out.data[23:0]);
        check(f < FRAMES && cur.size() == exp_w[f].size(), $sformatf("frame %0d: %0d words want %0d", f, cur.size(), exp_w[f].size()));
        foreach (cur[i]) begin
          bit found; found = 0;
          for (int j = 0; j < exp_w[f].size(); j++) if (exp_w[f][j] == cur[i]) begin found = 1; exp_w[f].delete(j); break; end
          check(found, $sformatf("word %h not expected in frame %0d", cur[i], f));
        end
        cur.delete(); n_frames_out++;
      end else begin cur.push_back(p_out.data); n_words++; end
    end
    if (f_out_valid) begin
      if (f_out.k) n_fib_trl++;
      else begin
        check(f_out.data[31] && f_out.data[21], "fibre output is a coincidence word");
        n_fib_coinc++;
      end
    end
  end

  // pixel boards
  for (genvar g = 0; g < NP; g++) begin : g_p
    initial begin
      p_word[g] = '0;
      @(negedge rst);
      repeat (4200) @(posedge clk);   // hit map clears itself after reset
      for (int f = 0; f < FRAMES; f++) begin
        int n; n = $urandom % 5;
        if (f == 80) begin at80[g] = 1; wait (go80); end
        for (int i = 0; i < n; i++) begin
          logic [31:0] w; logic [5:0] chip;
          repeat ($urandom % 4) @(posedge clk);
          chip = 6'($urandom % 4);
          if (($urandom % 5) == 0) w = {W_MON, 6'(g), 8'd0, 16'($urandom)};
          else w = {W_PIX, 3'($urandom), chip, 8'($urandom), 8'($urandom), 5'($urandom)};
          if (!dis[g]) begin
            if (w[31:30] == W_MON) mon_sent.push_back(w);
            else begin
              exp_w[f].push_back(swb_word(w, 3'd2, 6'(g)));
              hist[g][chip]++;
            end
          end
          #1 p_valid[g] = 1; p_word[g] = '{k: 1'b0, data: w};
          @(posedge clk); #1 p_valid[g] = 0;
        end
        repeat ($urandom % 4) @(posedge clk);
        #1 p_valid[g] = 1; p_word[g] = '{k: 1'b1, data: trailer_word(24'(f))};
        @(posedge clk); #1 p_valid[g] = 0;
        repeat (8) @(posedge clk);
      end
    end
  end
  // fibre boards: boards 0/1 and 2/3 see the same clusters (both ribbon ends)
  for (genvar g = 0; g < NF; g++) begin : g_f
    initial begin
      f_word[g] = '0;
      @(negedge rst);
      repeat (4200) @(posedge clk);   // hit map clears itself after reset
      for (int f = 0; f < FRAMES; f++) begin
        for (int i = 0; i < 3; i++) begin
          int ch; ch = ((f * 7 + i * 3) % 16);
          #1 f_valid[g] = 1;
          // every third cluster is seen only at one end (dark count)
          f_word[g] = '{k: 1'b0, data: fib_word(3'(i), 10'((i == 2 && g >= 2) ? ch + 100 : ch), 5'd3)};
          @(posedge clk); #1 f_valid[g] = 0;
        end
        #1 f_valid[g] = 1; f_word[g] = '{k: 1'b1, data: trailer_word(24'(f))};
        @(posedge clk); #1 f_valid[g] = 0;
        repeat (20) @(posedge clk);
      end
    end
  end

  task automatic pc_read(input logic [1:0] bar, input logic [15:0] a, output logic [31:0] d, input bit fib = 0);
    #1 pc_re = 1; pc_bar = bar; pc_addr = a;
    @(posedge clk); #1 pc_re = 0;
    @(posedge clk); d = fib ? f_rdata : p_rdata;
  endtask
  task automatic pc_write(input logic [1:0] bar, input logic [15:0] a, input logic [31:0] d);
    #1 pc_we = 1; pc_bar = bar; pc_addr = a; pc_wdata = d;
    @(posedge clk); #1 pc_we = 0;
  endtask

  initial begin
    logic [31:0] d;
    repeat (3) @(posedge clk); #1 rst = 0;
    // input 2 is switched off from frame 80 on, between frames
    wait (at80 == '1);
    repeat (300) @(posedge clk);
    pc_write(2'd1, 16'd0, 32'h4);
    repeat (2) @(posedge clk);
    dis[2] = 1; go80 = 1;
    repeat (4000) @(posedge clk);
    check(n_frames_out == FRAMES, $sformatf("%0d frames out", n_frames_out));
    pc_read(2'd0, 16'd0, d);
    check(d == mon_sent.size(), "monitoring pointer");
    // merged order differs from send order; per source the order is kept
    begin
      logic [31:0] per_src [NP][$];
      int k [NP];
      foreach (mon_sent[i]) per_src[mon_sent[i][29:24]].push_back(mon_sent[i]);
      for (int g = 0; g < NP; g++) k[g] = 0;
      for (int i = 0; i < mon_sent.size(); i++) begin
        int g;
        pc_read(2'd2, 16'(i), d);
        g = int'(d[29:24]);
        check(g < NP && k[g] < per_src[g].size() && d == per_src[g][k[g]],
              $sformatf("monitoring word %0d: %h", i, d));
        if (g < NP) k[g]++;
      end
    end
    for (int g = 0; g < 2; g++) for (int c = 0; c < 4; c++) begin
      #1 hist_addr = {6'(g), 6'(c)};
      @(posedge clk); #1;
      check(p_hist == hist[g][c] && hist[g][c] > 0, $sformatf("hit map %0d/%0d: %0d want %0d", g, c, p_hist, hist[g][c]));
    end
    pc_write(2'd1, 16'd2, 32'd1);
    repeat (4200) @(posedge clk);
    #1 hist_addr = {6'd0, 6'd1}; @(posedge clk); #1;
    check(p_hist == 0, "hit map cleared");
    pc_read(2'd0, 16'd1, d);
    check(d == FRAMES, "frame counter over BAR0");
    check(n_fib_trl == FRAMES && n_fib_coinc == FRAMES * 2 * 2, $sformatf("fibre coincidences %0d", n_fib_coinc));
    pc_read(2'd0, 16'd4, d, 1);
    check(d == n_fib_coinc, "coincidence counter over BAR0");
    pc_read(2'd0, 16'd5, d, 1);
    // stored first halves of the pairs plus the one-ended clusters
    check(d == FRAMES * 8, $sformatf("unpaired-cluster counter %0d", d));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
