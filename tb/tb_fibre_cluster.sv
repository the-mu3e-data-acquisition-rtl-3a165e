// tb_fibre_cluster: feeds time slots of fibre hits (random channel sets,
// hits in random order, duplicates included) and checks the cluster words
// against runs of adjacent channels found here, the suppression count of
// single-channel runs, the 31-channel size limit and the frame ends.
module tb_fibre_cluster;
  import daq_pkg::*;
  localparam int CH = 64;
  logic clk = 0, rst = 1;
  logic in_valid = 0, in_ready, in_is_hit = 0, in_slot_end = 0, in_frame_end = 0;
  hit_t in_hit = '0;
  logic out_valid, out_ready = 1;
  item_t out_item;
  logic [15:0] suppressed_cnt;
  int checks = 0, failures = 0;
  fibre_cluster #(.CHANNELS(CH), .MIN_SIZE(2)) dut (.*);
  always #4 clk = ~clk;
  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  item_t exp_q [$];
  int n_supp = 0, n_clu = 0;
  always @(posedge clk) if (out_valid && out_ready) begin
    if (exp_q.size() == 0) check(0, "unexpected output");
    else begin
      item_t e; e = exp_q.pop_front();
      check(out_item == e, $sformatf("item %h want %h", out_item, e));
    end
  end

  task automatic put(input logic [5:0] ch, input logic last, input logic fe, input logic [15:0] ts,
                     input logic hit);
    #1 in_valid = 1; in_is_hit = hit; in_slot_end = last; in_frame_end = fe;
    in_hit = '0; in_hit.ts = ts; in_hit.chip = 6'(ch / 32); in_hit.col = 8'(ch % 32);
    do @(posedge clk); while (!in_ready);
    #1 in_valid = 0;
  endtask

  task automatic slot(input logic [CH-1:0] map, input logic [15:0] ts);
    int chs [$]; int p; logic fe;
    fe = (ts[2:0] == 3'd7);
    for (int i = 0; i < CH; i++) if (map[i]) begin chs.push_back(i); if ($urandom % 4 == 0) chs.push_back(i); end
    chs.shuffle();
    // expected clusters
    p = 0;
    while (p < CH) begin
      if (map[p]) begin
        int l; l = 0;
        while (p + l < CH && map[p + l] && l < 31) l++;
        if (l >= 2) begin
          exp_q.push_back('{has_word: 1'b1, word: fib_word(ts[2:0], 10'(p), 5'(l)), frame_end: 1'b0, frame: '0});
          n_clu++;
        end else n_supp++;
        p += l;
      end else p++;
    end
    if (fe) exp_q.push_back('{has_word: 1'b0, word: '0, frame_end: 1'b1, frame: 24'(ts >> 3)});
    if (chs.size() == 0) put(0, 1, fe, ts, 0);
    else for (int i = 0; i < chs.size(); i++) put(6'(chs[i]), i == chs.size() - 1, fe, ts, 1);
  endtask

  initial begin
    repeat (3) @(posedge clk); #1 rst = 0;
    for (int t = 0; t < 300; t++) begin
      logic [CH-1:0] m;
      m = {$urandom, $urandom} & {$urandom, $urandom};
      if (t % 5 == 0) m = '0;
      if (t % 8 == 7 && t % 3 == 0) m = '0;
      out_ready = 1;
      slot(m, 16'(t));
    end
    slot({24'h0, 40'hFF_FFFF_FFFF}, 16'd300);   // run of 40: 31 + 9
    repeat (50) @(posedge clk);
    check(exp_q.size() == 0, $sformatf("%0d items missing", exp_q.size()));
    check(suppressed_cnt == 16'(n_supp) && n_supp > 0, $sformatf("suppressed %0d want %0d", suppressed_cnt, n_supp));
    $display("clusters %0d suppressed %0d", n_clu, n_supp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
