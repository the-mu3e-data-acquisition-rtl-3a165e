// timewalk_corr: time-walk correction of pixel hit time stamps. Small
// signals cross the comparator threshold later than large ones, and the
// time over threshold (ToT) measures the signal size, so the correction
// is a function of ToT: ts_out = ts_in - lut[tot]. The 32-entry lookup
// table (4-bit entries, in time stamp bins) is written through a simple
// configuration port and cleared by reset, which makes the block
// transparent until it is configured. The correction follows the paper;
// the table form, its width and the configuration port are this design's
// choice. One clock latency; no back-pressure.
module timewalk_corr #(
  parameter int CORR_W = 4
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                cfg_we,
  input  logic [4:0]          cfg_addr,
  input  logic [CORR_W-1:0]   cfg_data,
  input  logic                in_valid,
  input  daq_pkg::hit_t       in_hit,
  output logic                out_valid,
  output daq_pkg::hit_t       out_hit
);
  import daq_pkg::*;
  logic [CORR_W-1:0] lut [32];

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < 32; i++) lut[i] <= '0;
    end else if (cfg_we) begin
      lut[cfg_addr] <= cfg_data;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      out_hit   <= '0;
    end else begin
      out_valid  <= in_valid;
      out_hit    <= in_hit;
      out_hit.ts <= in_hit.ts - TS_W'(lut[in_hit.tot]);
    end
  end
endmodule
