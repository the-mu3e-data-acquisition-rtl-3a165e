// tb_feb_link_tx: random data items with frame ends and random monitoring
// words on 4 ASIC links. Checks that data words and trailers leave in
// order, every trailer right after its frame's last word, that monitoring
// words carry their link number and data and only fill free clocks, and
// that a monitoring word arriving while its link's register is full is
// counted as dropped.
module tb_feb_link_tx;
  import daq_pkg::*;
  localparam int N = 4;
  logic clk = 0, rst = 1, in_valid = 0, in_ready, out_valid;
  item_t in_item = '0;
  logic [N-1:0] mon_valid = 0;
  logic [15:0] mon [N];
  lword_t out_word;
  logic [15:0] mon_drop_cnt;
  int checks = 0, failures = 0;
  feb_link_tx #(.N_MON(N)) dut (.*);
  always #4 clk = ~clk;
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  lword_t exp_d [$];
  logic [31:0] exp_m [$];
  int n_mon_sent = 0, n_mon_got = 0;
  always @(posedge clk) if (out_valid) begin
    if (!out_word.k && out_word.data[31:30] == W_MON) begin
      int idx; idx = -1;
      n_mon_got++;
      foreach (exp_m[i]) if (exp_m[i] == out_word.data) idx = i;
      check(idx >= 0, $sformatf("unknown monitoring word %h", out_word.data));
      if (idx >= 0) exp_m.delete(idx);
    end else begin
      if (exp_d.size() == 0) check(0, "unexpected data word");
      else begin
        lword_t e; e = exp_d.pop_front();
        check(out_word == e, $sformatf("word %h want %h", out_word, e));
      end
    end
  end

  initial begin
    for (int i = 0; i < N; i++) mon[i] = 0;
    repeat (3) @(posedge clk); #1 rst = 0;
    for (int c = 0; c < 2000; c++) begin
      #1;
      mon_valid = '0;
      if (c < 1500) for (int i = 0; i < N; i++)
        if ($urandom % 40 == 0 && !dut.pend[i]) begin
          mon_valid[i] = 1; mon[i] = 16'($urandom);
          exp_m.push_back({W_MON, 6'(i), 8'd0, mon[i]}); n_mon_sent++;
        end
      if (!(in_valid && !in_ready)) begin
        in_valid = (c < 1500) && ($urandom % 3 != 0);
        in_item.has_word = ($urandom % 5 != 0);
        in_item.word = {W_PIX, 30'($urandom)};
        in_item.frame_end = ($urandom % 6 == 0) || !in_item.has_word;
        in_item.frame = 24'($urandom);
        if (in_valid) begin
          if (in_item.has_word) exp_d.push_back('{k: 1'b0, data: in_item.word});
          if (in_item.frame_end) exp_d.push_back('{k: 1'b1, data: trailer_word(in_item.frame)});
        end
      end
      @(posedge clk);
    end
    check(exp_d.size() == 0, $sformatf("%0d data words missing", exp_d.size()));
    check(exp_m.size() == 0 && n_mon_got == n_mon_sent && n_mon_sent > 20,
          $sformatf("monitoring sent %0d got %0d", n_mon_sent, n_mon_got));
    check(mon_drop_cnt == 0, "no drops so far");
    // two words for one link while it cannot be sent: the second is dropped
    exp_d.push_back('{k: 1'b0, data: 32'h1}); exp_d.push_back('{k: 1'b0, data: 32'h1});
    #1 in_valid = 1; in_item = '{has_word: 1'b1, word: 32'h1, frame_end: 1'b0, frame: '0};
    mon_valid = 4'b0001; mon[0] = 16'hAAAA; @(posedge clk);
    #1 mon[0] = 16'hBBBB; @(posedge clk);
    #1 mon_valid = 0; in_valid = 0;
    exp_m.push_back({W_MON, 6'd0, 8'd0, 16'hAAAA});
    repeat (5) @(posedge clk);
    check(mon_drop_cnt == 1, $sformatf("drops %0d", mon_drop_cnt));
    check(exp_m.size() == 0, "held monitoring word sent");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
