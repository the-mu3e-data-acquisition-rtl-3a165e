// tb_farm_node: a farm node with 2 input links, a 256-word frame buffer
// (frames up to 32 words) and 256-word host rings. A PC model sets up the
// registers and the coordinate table over the BAR interface, consumes both
// DMA rings (moving the read pointers on), and returns a keep/drop
// decision for every frame it sees on ring A (keep every second frame).
// Checks: every frame leaves once, forwarded whole or kept; ring A holds
// the central-pixel hits of kept frames with correct x, y, z (table:
// x = column, y = 2 * row, z = sensor) and the trailer; ring B holds the
// full content of the frames the PC kept; block pointer writes arrive;
// the frame counters read over BAR0 match.
module tb_farm_node;
  import daq_pkg::*;
  localparam int NL = 2, FRAMES = 80, RL = 8;
  logic clk = 0, rst = 1;
  logic [NL-1:0] link_valid = 0;
  lword_t link_word [NL];
  logic fwd_valid, fwd_ready = 1;
  lword_t fwd_word;
  logic host_a_valid, host_a_ready = 1, host_b_valid, host_b_ready = 1;
  logic [63:0] host_a_addr, host_b_addr, host_b_data;
  logic [127:0] host_a_data;
  logic pc_we = 0, pc_re = 0, pc_rvalid;
  logic [1:0] pc_bar = 0;
  logic [15:0] pc_addr = 0;
  logic [31:0] pc_wdata = 0, pc_rdata;
  int checks = 0, failures = 0;
  farm_node #(.N_LINK(NL), .FIFO_DEPTH(64), .BUF_LOG2(8), .MAX_FRAME(32), .RING_LOG2(RL)) dut (.*);
  always #4 clk = ~clk;
  initial begin
    #100000000; failures++;
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

  localparam logic [63:0] BASE_A = 64'h1_0000, CTRL_A = 64'h2_0000, BASE_B = 64'h3_0000, CTRL_B = 64'h4_0000;
  lword_t frame_w [FRAMES][$];   // frame content (the merge order between links is free)
  int where [FRAMES];
  logic [127:0] ring_a [1 << RL];
  logic [63:0]  ring_b [1 << RL];
  int wp_a = 0, wp_b = 0, rd_a = 0, rd_b = 0, n_ctrl_a = 0, n_ctrl_b = 0;
  int dec_q [$], keep_q [$];
  lword_t cur_fwd [$];
  lword_t exp_b [$];
  int n_a_hits = 0, n_b_words = 0, n_kept = 0;

  always @(posedge clk) if (!rst) begin
    if (fwd_valid && fwd_ready) begin
      if (fwd_word.k) begin
        int f; f = int'(fwd_word.data[23:0]);
        check(where[f] == 0, "frame leaves once (forward)"); where[f] = 1;
        check(cur_fwd.size() == frame_w[f].size(), "forwarded frame complete");
        cur_fwd.delete();
      end else cur_fwd.push_back(fwd_word);
    end
    if (host_a_valid && host_a_ready) begin
      if (host_a_addr == CTRL_A) begin n_ctrl_a++; wp_a = int'(host_a_data[RL-1:0]); end
      else ring_a[(host_a_addr - BASE_A) / 16] = host_a_data;
    end
    if (host_b_valid && host_b_ready) begin
      if (host_b_addr == CTRL_B) begin n_ctrl_b++; wp_b = int'(host_b_data[RL-1:0]); end
      else ring_b[(host_b_addr - BASE_B) / 8] = host_b_data;
    end
  end

  for (genvar g = 0; g < NL; g++) begin : g_l
    initial begin
      link_word[g] = '0;
      @(negedge rst);
      repeat (200) @(posedge clk);
      for (int f = 0; f < FRAMES; f++) begin
        int n; n = $urandom % 8;
        for (int i = 0; i < n; i++) begin
          logic [31:0] w;
          case ($urandom % 3)
            0: w = {1'b0, 3'd0, 6'(g), 6'($urandom % 4), 8'($urandom), 8'($urandom)};   // central pixel
            1: w = {1'b0, 3'd1, 6'(g), 6'($urandom % 4), 8'($urandom), 8'($urandom)};   // outer layers
            default: w = {1'b1, 31'($urandom)};                                      // fibre
          endcase
          #1 link_valid[g] = 1; link_word[g] = '{k: 1'b0, data: w};
          @(posedge clk); #1 link_valid[g] = 0;
          frame_w[f].push_back('{k: 1'b0, data: w});
        end
        #1 link_valid[g] = 1; link_word[g] = '{k: 1'b1, data: trailer_word(24'(f))};
        @(posedge clk); #1 link_valid[g] = 0;
        repeat (20 + $urandom % 20) @(posedge clk);
      end
    end
  end

  task automatic pc_write(input logic [1:0] bar, input int a, input logic [31:0] d);
    #1 pc_we = 1; pc_bar = bar; pc_addr = 16'(a); pc_wdata = d;
    @(posedge clk); #1 pc_we = 0;
  endtask
  task automatic pc_read(input logic [1:0] bar, input int a, output logic [31:0] d);
    #1 pc_re = 1; pc_bar = bar; pc_addr = 16'(a);
    @(posedge clk); #1 pc_re = 0;
    @(posedge clk); d = pc_rdata;
  endtask

  // PC: consume ring A up to its write pointer, decide; consume ring B
  logic [31:0] a_frame [$];
  task automatic pc_poll();
    while (rd_a != wp_a) begin
      logic [127:0] e; logic [31:0] w;
      e = ring_a[rd_a % (1 << RL)]; w = e[127:96];
      rd_a = (rd_a + 1) % (1 << RL);
      if (w[31:24] == K28_4) begin
        int f, k; f = int'(w[23:0]);
        check(where[f] == 0, "frame leaves once (local)"); where[f] = 2;
        // the hits seen are the central pixel words of this frame
        k = 0;
        foreach (frame_w[f][i]) if (frame_w[f][i].data[31:28] == 0) begin
          int j; j = -1;
          foreach (a_frame[x]) if (j < 0 && a_frame[x] == frame_w[f][i].data) j = x;
          check(j >= 0, "central hit on ring A");
          if (j >= 0) a_frame.delete(j);
          k++;
        end
        check(a_frame.size() == 0, "no extra hits on ring A");
        a_frame.delete();
        pc_write(2'd1, 8, 32'(f % 2 == 0));
        if (f % 2 == 0) begin
          n_kept++;
          keep_q.push_back(f);
        end
      end else begin
        check(fval(e[95:64]) == real'(w[15:8]) && fval(e[63:32]) == 2.0 * real'(w[7:0]) &&
              fval(e[31:0]) == real'(w[27:16]), $sformatf("coordinates of %h", w));
        a_frame.push_back(w); n_a_hits++;
      end
    end
    pc_write(2'd1, 20, 32'(rd_a));
    while (rd_b != wp_b) begin
      logic [63:0] e; lword_t w;
      e = ring_b[rd_b % (1 << RL)];
      rd_b = (rd_b + 1) % (1 << RL);
      w = e[32:0];
      check(e[63:33] == 0, "ring B word format");
      if (w.k) begin
        // a kept frame: same words as sent, in any order between the links
        int f; lword_t want [$];
        f = keep_q.size() > 0 ? keep_q.pop_front() : -1;
        check(f == int'(w.data[23:0]), $sformatf("kept frame %0d read out, want %0d", w.data[23:0], f));
        if (f >= 0) begin
          want = frame_w[f];
          foreach (exp_b[i]) begin
            int j; j = -1;
            foreach (want[x]) if (j < 0 && want[x] == exp_b[i]) j = x;
            check(j >= 0, $sformatf("ring B word %h in frame %0d", exp_b[i], f));
            if (j >= 0) want.delete(j);
          end
          check(want.size() == 0, "ring B frame complete");
        end
        exp_b.delete();
      end else exp_b.push_back(w);
      n_b_words++;
    end
    pc_write(2'd1, 28, 32'(rd_b));
  endtask

  initial begin
    logic [31:0] d;
    for (int f = 0; f < FRAMES; f++) where[f] = 0;
    repeat (3) @(posedge clk); #1 rst = 0;
    pc_write(2'd1, 16, BASE_A[31:0]); pc_write(2'd1, 17, BASE_A[63:32]);
    pc_write(2'd1, 18, CTRL_A[31:0]); pc_write(2'd1, 19, CTRL_A[63:32]);
    pc_write(2'd1, 24, BASE_B[31:0]); pc_write(2'd1, 25, BASE_B[63:32]);
    pc_write(2'd1, 26, CTRL_B[31:0]); pc_write(2'd1, 27, CTRL_B[63:32]);
    // coordinate table for sensors {board 0..1, chip 0..3}
    for (int s = 0; s < 8; s++) begin
      int sens; sens = (s / 4) * 64 + s % 4;
      for (int k = 0; k < 9; k++) begin
        int v;
        case (k) 2: v = sens * 65536; 3: v = 65536; 7: v = 2 * 65536; default: v = 0; endcase
        pc_write(2'd3, sens * 16 + k, 32'(v));
      end
    end
    pc_write(2'd1, 9, 32'd3);
    for (int n = 0; n < 1500; n++) begin
      repeat (1 + $urandom % 30) @(posedge clk);
      // the PC pauses for a while: the buffer fills and frames go on
      if (n == 60) repeat (1200) @(posedge clk);
      pc_poll();
    end
    begin
      int nf, nl; nf = 0; nl = 0;
      foreach (where[f]) begin if (where[f] == 1) nf++; if (where[f] == 2) nl++; end
      check(nf + nl == FRAMES, $sformatf("frames out %0d fwd + %0d local", nf, nl));
      check(nf > 0 && nl > 0, "both forward and local frames");
      pc_read(2'd0, 0, d); check(d == nl, "BAR0 frames kept");
      pc_read(2'd0, 1, d); check(d == nf, "BAR0 frames forwarded");
    end
    check(exp_b.size() == 0 && keep_q.size() == 0 && n_b_words > 0 && n_kept > 0, "ring B complete");
    check(n_ctrl_a > 0 && n_ctrl_b > 0, "pointer writes after blocks");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
