// hit_histogram: hit map on the switching board. Every valid input adds
// one to the counter of its bin (for pixels: the sensor index), and the
// PC reads the counters through rd_addr/rd_data (one clock latency) to
// watch the detector while data flow. clear zeroes the map by sweeping one
// bin per clock, as a block RAM would have to; hits arriving during the
// sweep are not counted (clearing is high meanwhile). Counters saturate.
// The paper names hit maps and histograms; binning, width and clearing are
// this design's choice.
module hit_histogram #(
  parameter int BIN_W = 12,
  parameter int CNT_W = 32
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             clear,
  output logic             clearing,
  input  logic             in_valid,
  input  logic [BIN_W-1:0] in_bin,
  input  logic [BIN_W-1:0] rd_addr,
  output logic [CNT_W-1:0] rd_data
);
  logic [CNT_W-1:0] cnt [1 << BIN_W];
  logic [BIN_W-1:0] cp;

  always_ff @(posedge clk) begin
    if (clearing) cnt[cp] <= '0;
    else if (in_valid && cnt[in_bin] != '1) cnt[in_bin] <= cnt[in_bin] + 1'b1;
    rd_data <= cnt[rd_addr];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      clearing <= 1'b1; cp <= '0;          // reset also sweeps the map
    end else if (clearing) begin
      cp <= cp + 1'b1;
      if (cp == '1) clearing <= 1'b0;
    end else if (clear) begin
      clearing <= 1'b1; cp <= '0;
    end
  end
endmodule
