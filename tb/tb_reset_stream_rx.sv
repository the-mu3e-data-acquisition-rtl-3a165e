// tb_reset_stream_rx: drives the receiver from reset_stream_tx and checks
// the run-state sequence, the command strobe, and that ts_reset comes
// exactly 4 clocks after the generator accepted the RESET datagram (the
// fixed latency on which synchronous resets across the system rely). A
// corrupted symbol must be counted in link_err.
module tb_reset_stream_rx;
  import daq_pkg::*;
  logic clk = 0, rst = 1, cmd_valid = 0, cmd_ready;
  logic [7:0] cmd = 0;
  logic [9:0] sym, sym_rx;
  logic flip = 0;
  logic ts_reset, running, rcmd_valid;
  logic [7:0] rcmd;
  logic [15:0] link_err;
  int checks = 0, failures = 0;
  reset_stream_tx u_tx (.clk, .rst, .cmd_valid, .cmd, .cmd_ready, .sym);
  assign sym_rx = flip ? sym ^ 10'b0000100000 : sym;
  reset_stream_rx dut (.clk, .rst, .sym(sym_rx), .ts_reset, .running,
                       .cmd_valid(rcmd_valid), .cmd(rcmd), .link_err);
  always #4 clk = ~clk;

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int cyc = 0, t_acc = 0, t_rst = -1, n_rst = 0;
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) if (ts_reset) begin t_rst = cyc; n_rst++; end

  task automatic send(input logic [7:0] c);
    #1 cmd_valid = 1; cmd = c;
    do @(posedge clk); while (!cmd_ready);
    t_acc = cyc;
    #1 cmd_valid = 0;
    repeat (8) @(posedge clk);
  endtask

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (3) @(posedge clk); #1 rst = 0;
    repeat (10) @(posedge clk);
    check(!running, "idle after reset");
    send(RS_RUN_START);   check(!running, "start without prepare ignored");
    send(RS_RUN_PREPARE); check(!running, "prepared is not running");
    send(RS_RUN_START);   check(running, "running after start");
    check(rcmd == RS_RUN_START, "last command strobed");
    send(8'h55);          check(running && rcmd == 8'h55, "other datagram passes as command");
    send(RS_RESET);
    check(!running, "reset leaves run");
    check(n_rst == 1, "one ts_reset pulse");
    check(t_rst - t_acc == 4, $sformatf("ts_reset latency %0d, want 4", t_rst - t_acc));
    send(RS_RUN_PREPARE); send(RS_RESET); check(!running, "prepared, reset");
    send(RS_RUN_START);   check(running, "reset between prepare and start keeps the run prepared");
    send(RS_RUN_STOP);
    check(!running, "stopped");
    check(link_err == 0, "no link errors on clean stream");
    @(negedge clk) flip = 1; @(negedge clk) flip = 0;
    repeat (4) @(posedge clk);
    check(link_err >= 1, "bit error counted");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
