// tb_fibre_coinc: random clusters from the 4 boards of two fibre ends
// (boards 0,1 one end; 2,3 the other) in frames. The expected output is
// worked out here: a cluster that finds an unused cluster of the same
// board pair and channel at the other end, in the same frame and within
// one time bin, gives one coincidence word; others are counted unpaired.
// Trailers and pixel words must pass unchanged.
module tb_fibre_coinc;
  import daq_pkg::*;
  localparam int NF = 4, CH = 16;
  logic clk = 0, rst = 1, in_valid = 0, in_ready, out_valid, out_ready = 1;
  lword_t in_word = '0, out_word;
  logic [5:0] in_src = 0;
  logic [31:0] coinc_cnt, single_cnt;
  int checks = 0, failures = 0;
  fibre_coinc #(.N_FEB(NF), .CHANNELS(CH), .WINDOW(1)) dut (.*);
  always #4 clk = ~clk;
  initial begin
    #100000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  bit stall_on = 1;
  always @(posedge clk) out_ready <= !stall_on || ($urandom % 3) != 0;
  lword_t exp_q [$];
  always @(posedge clk) if (out_valid && out_ready) begin
    if (exp_q.size() == 0) check(0, "unexpected output");
    else begin
      lword_t e; e = exp_q.pop_front();
      check(out_word == e, $sformatf("out %h want %h", out_word, e));
    end
  end

  int stored [2][NF/2][CH];   // time bin + 1 of an unused cluster, 0 = none
  int n_co = 0, n_si = 0;
  task automatic send(input lword_t w, input int src);
    #1 in_valid = 1; in_word = w; in_src = 6'(src);
    do @(posedge clk); while (!in_ready);
    #1 in_valid = 0;
  endtask

  initial begin
    repeat (3) @(posedge clk); #1 rst = 0;
    for (int f = 0; f < 200; f++) begin
      for (int s = 0; s < 2; s++) for (int p = 0; p < NF/2; p++) for (int c = 0; c < CH; c++) stored[s][p][c] = 0;
      for (int n = 0; n < 12; n++) begin
        int src, side, pair, ch, tsf, sz;
        src = $urandom % NF; side = src / 2; pair = src % 2; ch = $urandom % 4; tsf = $urandom % 8;
        sz = 2 + $urandom % 3;
        if (stored[!side][pair][ch] != 0 &&
            (tsf - (stored[!side][pair][ch] - 1) <= 1 && (stored[!side][pair][ch] - 1) - tsf <= 1)) begin
          exp_q.push_back('{k: 1'b0, data: {1'b1, 3'(tsf), 6'(src), 1'b1, 3'(stored[!side][pair][ch] - 1),
                                            3'd0, 10'(ch), 5'(sz)}});
          stored[!side][pair][ch] = 0;
          n_co++;
        end else begin
          stored[side][pair][ch] = tsf + 1;
          n_si++;
        end
        send('{k: 1'b0, data: fib_word(3'(tsf), 10'(ch), 5'(sz))}, src);
        if (n == 5) begin
          lword_t pw; pw = '{k: 1'b0, data: {W_PIX, 30'($urandom)}};
          exp_q.push_back(pw); send(pw, 0);
        end
      end
      exp_q.push_back('{k: 1'b1, data: trailer_word(24'(f))});
      send('{k: 1'b1, data: trailer_word(24'(f))}, 0);
    end
    stall_on = 0;
    repeat (10) @(posedge clk);
    check(exp_q.size() == 0, $sformatf("%0d outputs missing", exp_q.size()));
    check(coinc_cnt == n_co && single_cnt == n_si && n_co > 50,
          $sformatf("coinc %0d/%0d single %0d/%0d", coinc_cnt, n_co, single_cnt, n_si));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
