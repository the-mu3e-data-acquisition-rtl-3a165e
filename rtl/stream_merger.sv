// stream_merger: time alignment and merging of N_IN frame streams, used
// on the switching board (front-end links) and on the farm receiving board
// (switching-board links). Every input carries its data in 64 ns frames,
// each closed by a trailer {K28.4, frame}. Links differ in latency, so
// each input has a FIFO; the merger forwards, for the current frame, data
// words from the lowest-numbered input that has not yet delivered its
// trailer, consumes trailers of all inputs whose FIFO head is a trailer in
// the same clock, and once every enabled input has closed the frame sends
// one merged trailer. The output therefore holds complete, time-aligned
// frames of the whole detector part; a trailer whose frame number differs
// from the first one of the frame is counted in mismatch_cnt. Inputs with
// en_mask low are ignored (a dead link must not stall the merge).
// Throughput: one word per clock plus one clock per frame.
// The frame discipline is this design's choice; the paper says only that
// the streams are time-aligned and merged.
module stream_merger #(
  parameter int N_IN       = 34,
  parameter int FIFO_DEPTH = 64
) (
  input  logic            clk,
  input  logic            rst,
  input  logic [N_IN-1:0] en_mask,
  input  logic [N_IN-1:0] in_valid,
  input  daq_pkg::lword_t in_word [N_IN],
  output logic            out_valid,
  input  logic            out_ready,
  output daq_pkg::lword_t out_word,
  output logic [5:0]      out_src,      // input the data word came from
  output logic [15:0]     mismatch_cnt,
  output logic [15:0]     ovf_cnt,
  output logic [31:0]     frame_cnt
);
  import daq_pkg::*;
  localparam int IW = (N_IN > 1) ? $clog2(N_IN) : 1;
  logic [N_IN-1:0] f_valid, f_rd, done, is_trl, take_trl;
  lword_t          f_data [N_IN];
  logic [15:0]     f_ovf [N_IN];
  logic [23:0]     cur_frame;
  logic            have_frame;
  logic [IW-1:0]   di;
  logic            d_found, all_done, out_free;

  for (genvar g = 0; g < N_IN; g++) begin : g_fifo
    sync_fifo #(.W($bits(lword_t)), .DEPTH(FIFO_DEPTH)) u_fifo (
      .clk, .rst, .wr_en(in_valid[g]), .wr_data(in_word[g]), .rd_en(f_rd[g]),
      .rd_valid(f_valid[g]), .rd_data(f_data[g]), .ovf_cnt(f_ovf[g]));
    assign is_trl[g] = f_data[g].k && f_data[g].data[31:24] == K28_4;
  end

  assign out_free = !out_valid || out_ready;

  always_comb begin
    all_done = ((done | ~en_mask) == '1);
    take_trl = f_valid & is_trl & ~done & en_mask & {N_IN{!all_done}};
    d_found = 1'b0;
    di = '0;
    for (int i = N_IN - 1; i >= 0; i--)
      if (f_valid[i] && !is_trl[i] && !done[i] && en_mask[i]) begin d_found = 1'b1; di = IW'(i); end
    f_rd = take_trl;
    if (d_found && out_free && !all_done) f_rd[di] = 1'b1;
    // words from disabled inputs are discarded
    f_rd = f_rd | (f_valid & ~en_mask);
  end

  logic [15:0] ovf_sum;
  always_comb begin
    ovf_sum = '0;
    for (int i = 0; i < N_IN; i++) ovf_sum += f_ovf[i];
  end
  assign ovf_cnt = ovf_sum;

  always_ff @(posedge clk) begin
    if (rst) begin
      done <= '0; cur_frame <= '0; have_frame <= 1'b0;
      out_valid <= 1'b0; out_word <= '0; out_src <= '0;
      mismatch_cnt <= '0; frame_cnt <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (all_done) begin
        if (out_free) begin
          out_valid  <= 1'b1;
          out_word   <= '{k: 1'b1, data: trailer_word(cur_frame)};
          out_src    <= '0;
          done       <= '0;
          have_frame <= 1'b0;
          frame_cnt  <= frame_cnt + 1'b1;
        end
      end else begin
        if (d_found && out_free) begin
          out_valid <= 1'b1;
          out_word  <= f_data[di];
          out_src   <= 6'(di);
        end
        done <= done | take_trl;
        for (int i = N_IN - 1; i >= 0; i--)
          if (take_trl[i]) begin
            if (have_frame && f_data[i].data[23:0] != cur_frame && mismatch_cnt != '1)
              mismatch_cnt <= mismatch_cnt + 1'b1;
          end
        if (!have_frame && take_trl != '0) begin
          have_frame <= 1'b1;
          for (int i = N_IN - 1; i >= 0; i--) if (take_trl[i]) cur_frame <= f_data[i].data[23:0];
        end
      end
    end
  end
endmodule
