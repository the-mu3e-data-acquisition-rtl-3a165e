// tb_reset_stream_tx: decodes the generated reset stream with dec8b10b and
// checks idle commas, that every accepted datagram appears exactly once,
// its fixed latency (accept edge to decoded byte: 3 clocks), the comma
// after every datagram and the absence of coding errors.
module tb_reset_stream_tx;
  import daq_pkg::*;
  logic clk = 0, rst = 1, cmd_valid = 0, cmd_ready;
  logic [7:0] cmd = 0;
  logic [9:0] sym;
  logic valid, k, code_err, disp_err;
  logic [7:0] d;
  int checks = 0, failures = 0;
  reset_stream_tx dut (.*);
  dec8b10b u_dec (.clk, .rst, .en(1'b1), .sym, .valid, .d, .k, .code_err, .disp_err);
  always #4 clk = ~clk;

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // accepted datagrams, by accept cycle
  int acc_cyc [$];
  logic [7:0] acc_val [$];
  always @(posedge clk) if (!rst && cmd_valid && cmd_ready) begin
    acc_cyc.push_back(cyc); acc_val.push_back(cmd);
  end
  int got = 0, sent = 0;
  logic prev_data = 0;
  always @(posedge clk) if (!rst && valid && cyc > 6) begin
    checks++;
    if (code_err || disp_err) begin failures++; $display("FAIL coding error in stream"); end
    if (!k) begin
      checks++;
      if (acc_cyc.size() == 0) begin failures++; $display("FAIL unexpected datagram %02h", d); end
      else begin
        int c; logic [7:0] v;
        c = acc_cyc.pop_front(); v = acc_val.pop_front();
        if (v !== d || cyc - c != 3) begin
          failures++; $display("FAIL datagram %02h (want %02h), latency %0d", d, v, cyc - c);
        end
      end
      checks++;
      if (prev_data) begin failures++; $display("FAIL two datagrams without comma"); end
      got++;
    end else begin
      checks++;
      if (d !== K28_5) begin failures++; $display("FAIL idle is %02h", d); end
    end
    prev_data <= !k;
  end

  initial begin
    repeat (3) @(posedge clk); #1 rst = 0;
    repeat (10) @(posedge clk);
    for (int i = 0; i < 200; i++) begin
      #1 cmd_valid = ($urandom % 3) != 0; cmd = 8'($urandom);
      @(posedge clk);
      if (cmd_valid && cmd_ready) sent++;
    end
    #1 cmd_valid = 0;
    repeat (10) @(posedge clk);
    checks++;
    if (got != sent || sent < 50) begin failures++; $display("FAIL sent %0d got %0d", sent, got); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
