// tb_hit_sorter: random hits on 4 inputs, each arriving up to 8 clocks
// after its time stamp, with random output stalls. The expected output is
// the same hits ordered by (time stamp, input, arrival), less those that
// overflow a slot, which is worked out here independently. Also checked:
// no slot is read before it is DELAY clocks old, one frame_end per 64 ns
// frame in order, and that late and overflowing hits are counted.
module tb_hit_sorter;
  import daq_pkg::*;
  localparam int N = 4, SL = 5, DEPTH = 3, DELAY = 12;
  logic clk = 0, rst = 1;
  logic [TS_W-1:0] ts_now = 0;
  logic [N-1:0] in_valid = 0;
  hit_t in_hit [N];
  logic out_valid, out_ready = 1, out_is_hit, out_slot_end, out_frame_end;
  hit_t out_hit;
  logic [15:0] late_cnt, overflow_cnt;
  int checks = 0, failures = 0;
  hit_sorter #(.N_IN(N), .SLOT_LOG2(SL), .DEPTH(DEPTH), .DELAY(DELAY)) dut (.*);
  always #4 clk = ~clk;
  always @(posedge clk) ts_now <= rst ? '0 : ts_now + 1'b1;

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  typedef struct { longint key; hit_t h; } ent_t;
  ent_t exp_q [$];
  hit_t got_q [$];
  int per_slot [int];   // hits accepted per (input, ts)
  int seq = 0, n_ovf_exp = 0;
  int next_frame_ts = 7;

  always @(posedge clk) if (!rst && out_valid && out_ready) begin
    check(ts_now - out_hit.ts >= DELAY, $sformatf("slot %0d read too early at %0d", out_hit.ts, ts_now));
    if (out_is_hit) got_q.push_back(out_hit);
    if (out_frame_end) begin
      check(out_hit.ts == 16'(next_frame_ts), $sformatf("frame end at %0d, want %0d", out_hit.ts, next_frame_ts));
      next_frame_ts += 8;
    end
  end

  task automatic note(input int i);
    int key; key = in_hit[i].ts * 8 + i;
    if (!per_slot.exists(key)) per_slot[key] = 0;
    if (per_slot[key] < DEPTH) begin
      per_slot[key]++;
      exp_q.push_back('{key: (longint'(in_hit[i].ts) << 40) | (longint'(i) << 32) | longint'(seq), h: in_hit[i]});
    end else n_ovf_exp++;
    seq++;
  endtask

  task automatic drive(input int cycles, input int pct);
    for (int c = 0; c < cycles; c++) begin
      #1;
      out_ready = ($urandom % 8) != 0;
      for (int i = 0; i < N; i++) begin
        in_valid[i] = ($urandom % 100) < pct;
        in_hit[i] = hit_t'({$urandom, $urandom});
        in_hit[i].chip = 6'(i);
        in_hit[i].ts = ts_now - 16'($urandom % 9);
        if (in_hit[i].ts > ts_now) in_valid[i] = 0;   // before time zero
        if (in_valid[i]) note(i);
      end
      @(posedge clk);
    end
    #1 in_valid = 0;
  endtask

  initial begin
    for (int i = 0; i < N; i++) in_hit[i] = '0;
    repeat (3) @(posedge clk); #1 rst = 0;
    repeat (1 << SL) @(posedge clk);   // counter sweep after reset
    drive(3000, 12);
    // five hits of one input in one slot: two overflow
    for (int r = 0; r < 3; r++) begin
      logic [TS_W-1:0] t0; t0 = ts_now;
      for (int c = 0; c < 5; c++) begin
        #1 in_valid = 4'b0011;
        for (int i = 0; i < 2; i++) begin
          in_hit[i] = hit_t'({$urandom, $urandom}); in_hit[i].chip = 6'(i); in_hit[i].ts = t0;
          note(i);
        end
        @(posedge clk);
      end
      #1 in_valid = 0;
      drive(100, 12);
    end
    drive(200, 0);
    repeat (100) @(posedge clk);
    exp_q.sort() with (item.key);
    check(got_q.size() == exp_q.size(), $sformatf("got %0d hits, want %0d", got_q.size(), exp_q.size()));
    for (int i = 0; i < exp_q.size() && i < got_q.size(); i++)
      if (got_q[i] != exp_q[i].h) begin
        check(0, $sformatf("hit %0d: %h want %h", i, got_q[i], exp_q[i].h));
        break;
      end
    check(n_ovf_exp > 0 && overflow_cnt == 16'(n_ovf_exp), $sformatf("overflow %0d want %0d", overflow_cnt, n_ovf_exp));
    check(late_cnt == 0, "no late hits yet");
    check(next_frame_ts > 400 * 8, "frames closed while running");
    // a hit far behind the reader is late
    #1 in_valid[0] = 1; in_hit[0].ts = ts_now - 16'd40; @(posedge clk); #1 in_valid = 0;
    @(posedge clk);
    check(late_cnt == 1, "late hit counted");
    $display("sorted %0d hits, %0d overflowed", got_q.size(), n_ovf_exp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
