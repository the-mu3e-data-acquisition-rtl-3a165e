// tb_asic_link_rx: sends hit and monitoring packets through enc8b10b into
// the receiver and checks every decoded hit (including the time stamp
// extension, worked out here from ts_now at send time), every monitoring
// word, the latency, and that parity errors, protocol errors and
// corrupted symbols are counted and the bad packets dropped.
module tb_asic_link_rx;
  import daq_pkg::*;
  logic clk = 0, rst = 1;
  logic [7:0] td = K28_5; logic tk = 1;
  logic [9:0] sym, sym_rx;
  logic [9:0] flip = 0;
  logic [TS_W-1:0] ts_now = 16'd5000;
  logic hit_valid, mon_valid;
  hit_t hit;
  logic [15:0] mon, code_err_cnt, disp_err_cnt, parity_err_cnt, proto_err_cnt;
  int checks = 0, failures = 0;
  enc8b10b u_enc (.clk, .rst, .en(1'b1), .d(td), .k(tk), .sym);
  assign sym_rx = sym ^ flip;
  asic_link_rx #(.CHIP(6'd9)) dut (.clk, .rst, .sym(sym_rx), .ts_now, .hit_valid, .hit,
    .mon_valid, .mon, .code_err_cnt, .disp_err_cnt, .parity_err_cnt, .proto_err_cnt);
  always #4 clk = ~clk;
  always @(posedge clk) ts_now <= ts_now + 1'b1;

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic byte_out(input logic [7:0] b, input logic kk);
    #1 td = b; tk = kk;
    @(posedge clk);
  endtask

  hit_t exp_h [$];
  logic [15:0] exp_m [$];
  int n_hit = 0, n_mon = 0;

  task automatic send_hit(input logic [9:0] ts, input logic [7:0] col, row, input logic [4:0] tot,
                          input logic bad_par);
    logic [31:0] w; hit_t h; logic [TS_W-1:0] full;
    w = {ts, col, row, tot, 1'b0};
    w[0] = ^w[31:1] ^ bad_par;
    // symbol reaches the receiver 2 clocks after byte_out; the hit is
    // complete when the last byte is decoded
    full = ts_now + 16'd5;
    full = (full & 16'hFC00) | 16'(ts);
    if (ts > 10'((ts_now + 16'd5) & 16'h3FF)) full = full - 16'd1024;
    h = '{ts: full, chip: 6'd9, col: col, row: row, tot: tot};
    if (!bad_par) exp_h.push_back(h);
    byte_out(K28_0, 1);
    for (int i = 3; i >= 0; i--) byte_out(w[8*i +: 8], 0);
  endtask

  always @(posedge clk) begin
    if (hit_valid) begin
      n_hit++;
      if (exp_h.size() == 0) check(0, "unexpected hit");
      else begin
        hit_t e; e = exp_h.pop_front();
        check(hit == e, $sformatf("hit %h want %h", hit, e));
      end
    end
    if (mon_valid) begin
      n_mon++;
      if (exp_m.size() == 0) check(0, "unexpected monitoring word");
      else begin
        logic [15:0] e; e = exp_m.pop_front();
        check(mon == e, $sformatf("mon %h want %h", mon, e));
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk); #1 rst = 0;
    repeat (5) byte_out(K28_5, 1);
    for (int i = 0; i < 50; i++) begin
      send_hit(10'(ts_now + 16'd30 + 16'($urandom % 980)), 8'($urandom), 8'($urandom), 5'($urandom), 0);
      if (i % 7 == 0) begin
        logic [15:0] m; m = 16'($urandom);
        exp_m.push_back(m);
        byte_out(K28_3, 1); byte_out(m[15:8], 0); byte_out(m[7:0], 0);
      end
      if (i % 3 == 0) byte_out(K28_5, 1);
    end
    repeat (5) byte_out(K28_5, 1);
    check(n_hit == 50 && n_mon == 8, $sformatf("hits %0d mons %0d", n_hit, n_mon));
    check(code_err_cnt == 0 && disp_err_cnt == 0 && parity_err_cnt == 0 && proto_err_cnt == 0,
          "no errors on clean link");
    // parity error
    send_hit(10'd3, 8'd1, 8'd2, 5'd3, 1);
    repeat (4) byte_out(K28_5, 1);
    check(parity_err_cnt == 1, "parity error counted");
    // protocol error: data byte outside a packet, and a packet cut short
    byte_out(8'h42, 0);
    byte_out(K28_0, 1); byte_out(8'h01, 0); byte_out(K28_5, 1);
    repeat (4) byte_out(K28_5, 1);
    check(proto_err_cnt == 2, $sformatf("protocol errors %0d, want 2", proto_err_cnt));
    // bit error on the line
    @(negedge clk) flip = 10'b0000010000; @(negedge clk) flip = 0;
    repeat (4) byte_out(K28_5, 1);
    check(code_err_cnt + disp_err_cnt >= 1, "line error counted");
    // the hit just after is still received
    repeat (4) byte_out(K28_5, 1);
    send_hit(10'd100, 8'd7, 8'd8, 5'd9, 0);
    repeat (6) byte_out(K28_5, 1);
    check(exp_h.size() == 0, "last hit received");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
