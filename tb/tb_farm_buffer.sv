// tb_farm_buffer: a small buffer (128 words, 4 frame-table entries,
// MAX_FRAME 16) fed with frames of random length and word type, with a slow
// random selection so that the buffer fills and frames are forwarded.
// Checks: every frame leaves exactly once, either whole on the forward
// port or kept locally; a local frame gives exactly its central-pixel
// words and trailer on the hit port; kept frames are read out with their
// stored words (long frames truncated, the drop counted); dropped frames
// give nothing; the counters match.
module tb_farm_buffer;
  import daq_pkg::*;
  localparam int BL = 7, MF = 16, NL = 2, FRAMES = 300;
  logic clk = 0, rst = 1, in_valid = 0, in_ready, fwd_valid, fwd_ready = 1, hit_valid, hit_ready = 1;
  logic sel_valid = 0, sel_keep = 0, sel_ready, ro_valid, ro_ready = 1;
  lword_t in_word = '0, fwd_word, hit_word, ro_word;
  logic [31:0] frames_local, frames_fwd;
  logic [15:0] trunc_cnt;
  int checks = 0, failures = 0;
  farm_buffer #(.BUF_LOG2(BL), .MAX_FRAME(MF), .NFR_LOG2(NL)) dut (.*);
  always #4 clk = ~clk;
  initial begin
    #100000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  lword_t frame_w [FRAMES][$];
  int where [FRAMES];              // 0 none, 1 forwarded, 2 local
  int exp_trunc = 0;
  // forward port
  lword_t cur_fwd [$], cur_hit [$];
  int local_q [$], keep_q [$];
  lword_t ro_exp [$];
  int n_ro = 0, n_drop = 0;
  function automatic int fr_of(input lword_t w);
    return int'(w.data[23:0]);
  endfunction
  always @(posedge clk) begin
    fwd_ready <= ($urandom % 4) != 0;
    hit_ready <= ($urandom % 4) != 0;
    ro_ready  <= ($urandom % 4) != 0;
    if (fwd_valid && fwd_ready) begin
      if (fwd_word.k) begin
        int f; f = fr_of(fwd_word);
        check(where[f] == 0, "frame leaves once");
        where[f] = 1;
        check(cur_fwd.size() == frame_w[f].size() - 1, "forwarded frame length");
        for (int i = 0; i < cur_fwd.size() && i < frame_w[f].size(); i++)
          check(cur_fwd[i] == frame_w[f][i], "forwarded word");
        cur_fwd.delete();
      end else cur_fwd.push_back(fwd_word);
    end
    if (hit_valid && hit_ready) begin
      if (hit_word.k) begin
        int f, j; f = fr_of(hit_word);
        check(where[f] == 0, "frame leaves once");
        where[f] = 2;
        j = 0;
        foreach (frame_w[f][i]) if (!frame_w[f][i].k && frame_w[f][i].data[31:28] == 0) begin
          check(j < cur_hit.size() && cur_hit[j] == frame_w[f][i], "central pixel word on hit port");
          j++;
        end
        check(j == cur_hit.size(), "hit port word count");
        cur_hit.delete();
        local_q.push_back(f);
      end else cur_hit.push_back(hit_word);
    end
    if (ro_valid && ro_ready) begin
      check(ro_exp.size() > 0 && ro_word == ro_exp[0], "readout word");
      void'(ro_exp.pop_front());
      n_ro++;
    end
  end

  // selection: slow, random keep/drop, in buffer order
  initial begin
    @(negedge rst);
    forever begin
      repeat ($urandom % 40) @(posedge clk);
      if (local_q.size() > 0) begin
        int f; f = local_q[0];
        #1 sel_valid = 1; sel_keep = $urandom % 2;
        do @(posedge clk); while (!sel_ready);
        void'(local_q.pop_front());
        if (sel_keep) begin
          for (int i = 0; i < frame_w[f].size() - 1 && i < MF - 1; i++) ro_exp.push_back(frame_w[f][i]);
          ro_exp.push_back(frame_w[f][frame_w[f].size() - 1]);
        end else n_drop++;
        #1 sel_valid = 0;
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk); #1 rst = 0;
    for (int f = 0; f < FRAMES; f++) begin
      int n; n = $urandom % 22;
      where[f] = 0;
      if (n > MF - 1) exp_trunc += n - (MF - 1);
      for (int i = 0; i < n; i++) begin
        logic [3:0] top;
        case ($urandom % 3) 0: top = 4'h0; 1: top = 4'h1; default: top = 4'h8; endcase
        frame_w[f].push_back('{k: 1'b0, data: {top, 4'(i), 24'($urandom)}});
      end
      frame_w[f].push_back('{k: 1'b1, data: trailer_word(24'(f))});
      foreach (frame_w[f][i]) begin
        #1 in_valid = 1; in_word = frame_w[f][i];
        do @(posedge clk); while (!in_ready);
        #1 in_valid = 0;
        repeat ($urandom % 2) @(posedge clk);
      end
    end
    repeat (20000) @(posedge clk);
    begin
      int nf, nl, tr; nf = 0; nl = 0; tr = 0;
      for (int f = 0; f < FRAMES; f++) begin
        if (where[f] == 1) nf++;
        if (where[f] == 2) begin
          nl++;
          if (frame_w[f].size() - 1 > MF - 1) tr += frame_w[f].size() - 1 - (MF - 1);
        end
      end
      check(nf + nl == FRAMES, $sformatf("frames out %0d of %0d", nf + nl, FRAMES));
      check(nf > 20 && nl > 20, $sformatf("both paths used: fwd %0d local %0d", nf, nl));
      check(frames_fwd == nf && frames_local == nl, "frame counters");
      check(trunc_cnt == tr && tr > 0, $sformatf("truncation %0d want %0d", trunc_cnt, tr));
      check(ro_exp.size() == 0 && local_q.size() == 0 && n_ro > 0 && n_drop > 0, "all selections done");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
