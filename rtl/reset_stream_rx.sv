// reset_stream_rx: reset-stream receiver on a front-end board. It decodes
// the 8b/10b stream (symbol-aligned by the transceiver) and turns the
// datagrams into a one-cycle ts_reset pulse, the run state and a generic
// command strobe for all other datagrams. The path from symbol to output
// is a fixed two-register pipeline with no elastic buffer, so the reset
// lands on the same clock edge on every board fed by the same fan-out.
// Run states are this design's choice: IDLE -> PREPARED (RUN_PREPARE) ->
// RUNNING (RUN_START) -> IDLE (RUN_STOP). RESET restarts the time stamps;
// it keeps a PREPARED board prepared (so time stamps are synchronised
// between RUN_PREPARE and RUN_START) and ends a run that is RUNNING.
// link_err counts symbols with 8b/10b errors.
module reset_stream_rx (
  input  logic        clk,
  input  logic        rst,
  input  logic [9:0]  sym,
  output logic        ts_reset,
  output logic        running,
  output logic        cmd_valid,
  output logic [7:0]  cmd,
  output logic [15:0] link_err
);
  import daq_pkg::*;
  typedef enum logic [1:0] {S_IDLE, S_PREPARED, S_RUNNING} run_t;
  run_t state;
  logic valid, k, code_err, disp_err;
  logic [7:0] d;

  dec8b10b u_dec (.clk, .rst, .en(1'b1), .sym, .valid, .d, .k, .code_err, .disp_err);

  assign running = (state == S_RUNNING);

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= S_IDLE; ts_reset <= 1'b0; cmd_valid <= 1'b0; cmd <= '0; link_err <= '0;
    end else begin
      ts_reset  <= 1'b0;
      cmd_valid <= 1'b0;
      if (valid && (code_err || disp_err)) begin
        if (link_err != '1) link_err <= link_err + 1'b1;
      end else if (valid && !k) begin
        cmd_valid <= 1'b1;
        cmd       <= d;
        unique case (d)
          RS_RESET:       begin if (state == S_RUNNING) state <= S_IDLE; ts_reset <= 1'b1; end
          RS_RUN_PREPARE: if (state == S_IDLE) state <= S_PREPARED;
          RS_RUN_START:   if (state == S_PREPARED) state <= S_RUNNING;
          RS_RUN_STOP:    state <= S_IDLE;
          default: ;
        endcase
      end
    end
  end
endmodule
