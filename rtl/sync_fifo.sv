// sync_fifo: single-clock FIFO of DEPTH words (a power of two) with
// first-word-fall-through output. It sits behind each link that cannot be
// stalled: a word written while the FIFO is full is dropped and counted
// in ovf_cnt. rd_valid/rd_data show the oldest word; rd_en takes it.
module sync_fifo #(
  parameter int W     = 33,
  parameter int DEPTH = 64
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         wr_en,
  input  logic [W-1:0] wr_data,
  input  logic         rd_en,
  output logic         rd_valid,
  output logic [W-1:0] rd_data,
  output logic [15:0]  ovf_cnt
);
  localparam int AW = $clog2(DEPTH);
  logic [W-1:0] mem [DEPTH];
  logic [AW:0]  wp, rp;
  logic         full, do_rd;

  assign rd_valid = (wp != rp);
  assign full     = (wp[AW] != rp[AW]) && (wp[AW-1:0] == rp[AW-1:0]);
  assign rd_data  = mem[rp[AW-1:0]];
  assign do_rd    = rd_en && rd_valid;

  always_ff @(posedge clk) begin
    if (wr_en && (!full || do_rd)) mem[wp[AW-1:0]] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wp <= '0; rp <= '0; ovf_cnt <= '0;
    end else begin
      if (do_rd) rp <= rp + 1'b1;
      if (wr_en) begin
        if (!full || do_rd) wp <= wp + 1'b1;
        else if (ovf_cnt != '1) ovf_cnt <= ovf_cnt + 1'b1;
      end
    end
  end

  initial assert (DEPTH == (1 << AW)) else $error("sync_fifo: DEPTH must be a power of two");
endmodule
