// reset_stream_tx: generator of the reset stream in the clock and reset
// system. Every 8 ns it sends one 8b/10b symbol (1.25 Gbit/s at the
// 125 MHz master clock): the comma K28.5 when idle, or one 8-bit datagram
// naming a transition (reset, run prepare, run start, run stop; codes in
// daq_pkg). The stream is fanned out optically to all front-end boards, so
// every receiver sees the datagram in the same clock cycle. A command given
// with cmd_valid high is accepted in that cycle (cmd_ready is high one
// cycle in two, so that a comma follows every datagram and receivers keep
// symbol lock) and leaves the encoder two clocks later.
module reset_stream_tx (
  input  logic       clk,
  input  logic       rst,
  input  logic       cmd_valid,
  input  logic [7:0] cmd,
  output logic       cmd_ready,
  output logic [9:0] sym
);
  import daq_pkg::*;
  logic       last_cmd;   // previous cycle carried a datagram
  logic [7:0] d;
  logic       k;

  assign cmd_ready = !last_cmd;

  always_ff @(posedge clk) begin
    if (rst) begin
      last_cmd <= 1'b0;
      d        <= K28_5;
      k        <= 1'b1;
    end else if (cmd_valid && cmd_ready) begin
      last_cmd <= 1'b1;
      d        <= cmd;
      k        <= 1'b0;
    end else begin
      last_cmd <= 1'b0;
      d        <= K28_5;
      k        <= 1'b1;
    end
  end

  enc8b10b u_enc (.clk, .rst, .en(1'b1), .d, .k, .sym);
endmodule
