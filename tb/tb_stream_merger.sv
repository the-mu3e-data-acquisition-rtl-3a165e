// tb_stream_merger: four inputs send 64 ns frames (random word counts,
// random gaps, so the links are out of step); input 3 is disabled. Checks
// that each merged frame holds exactly the words of that frame from the
// enabled inputs, each input's words in order, with the right source
// index, followed by one trailer; that a wrong frame number is counted;
// and that back-pressure on the output loses nothing.
module tb_stream_merger;
  import daq_pkg::*;
  localparam int N = 4, FRAMES = 60;
  logic clk = 0, rst = 1;
  logic [N-1:0] en_mask = 4'b0111, in_valid = 0;
  lword_t in_word [N];
  logic out_valid, out_ready = 1;
  lword_t out_word;
  logic [5:0] out_src;
  logic [15:0] mismatch_cnt, ovf_cnt;
  logic [31:0] frame_cnt;
  int checks = 0, failures = 0;
  stream_merger #(.N_IN(N), .FIFO_DEPTH(64)) dut (.*);
  always #4 clk = ~clk;
  initial begin
    #4000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  // word: {2'b00, input[1:0], frame[11:0], seq[15:0]}
  int cnt_exp [FRAMES];
  int got_frame = 0, got_in_frame = 0;
  int last_seq [N];
  always @(posedge clk) if (!rst && out_valid && out_ready) begin
    if (out_word.k) begin
      check(out_word.data == trailer_word(24'(got_frame)), $sformatf("trailer %h for frame %0d", out_word.data, got_frame));
      check(got_in_frame == cnt_exp[got_frame], $sformatf("frame %0d: %0d words, want %0d", got_frame, got_in_frame, cnt_exp[got_frame]));
      got_frame++; got_in_frame = 0;
    end else begin
      int src, fr, sq;
      src = out_word.data[29:28]; fr = out_word.data[27:16]; sq = out_word.data[15:0];
      check(src == out_src && src != 3, "source index");
      check(fr == got_frame, $sformatf("word of frame %0d inside frame %0d", fr, got_frame));
      check(sq == last_seq[src] + 1, "per-input order");
      last_seq[src] = sq;
      got_in_frame++;
    end
  end

  initial begin
    for (int i = 0; i < N; i++) in_word[i] = '0;
    for (int i = 0; i < FRAMES; i++) cnt_exp[i] = 0;
    for (int i = 0; i < N; i++) last_seq[i] = 0;
  end

  for (genvar g = 0; g < N; g++) begin : g_src
    initial begin
      int sq; sq = 0;
      @(negedge rst);
      repeat (g * 7) @(posedge clk);
      for (int f = 0; f < FRAMES; f++) begin
        int n; n = $urandom % 6;
        if (g != 3) cnt_exp[f] += n;
        for (int w = 0; w < n; w++) begin
          repeat ($urandom % 8) @(posedge clk);
          sq++;
          #1 in_valid[g] = 1; in_word[g] = '{k: 1'b0, data: {2'b00, 2'(g), 12'(f), 16'(sq)}};
          @(posedge clk); #1 in_valid[g] = 0;
        end
        repeat ($urandom % 3) @(posedge clk);
        #1 in_valid[g] = 1;
        in_word[g] = '{k: 1'b1, data: trailer_word(24'((g == 2 && f == 30) ? 999 : f))};
        @(posedge clk); #1 in_valid[g] = 0;
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk); #1 rst = 0;
    fork
      repeat (3000) begin @(posedge clk); #1 out_ready = ($urandom % 4) != 0; end
    join
    out_ready = 1;
    repeat (300) @(posedge clk);
    check(got_frame == FRAMES, $sformatf("%0d frames, want %0d", got_frame, FRAMES));
    check(frame_cnt == FRAMES, "frame counter");
    check(mismatch_cnt == 1, $sformatf("mismatches %0d, want 1", mismatch_cnt));
    check(ovf_cnt == 0, "no FIFO overflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
