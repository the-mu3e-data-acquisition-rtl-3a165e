// farm_buffer: frame buffer of a farm node, standing in for the DDR4
// buffer of the receiving board, with the daisy-chain load distribution.
// At the first word of every 64 ns frame the node decides where the frame
// goes: into the local buffer if there is room for a frame of MAX_FRAME
// words and a free frame-table entry, otherwise, whole, to the next PC of
// the daisy chain (fwd_*). There is no back-channel: a full node simply
// passes frames on, as the paper describes. Of a locally kept frame, the
// central-pixel hit words and the trailer are also sent to the selection
// path (hit_*), while the whole frame is kept in the buffer.
// The selection (GPU) decides on buffered frames in order: sel_keep = 1
// reads the frame out on ro_* (to the host, for full reconstruction),
// sel_keep = 0 frees it. A frame keeps at most MAX_FRAME words including
// its trailer; further data words are dropped
// and counted. The buffer is an on-chip array of 2^BUF_LOG2 words here;
// the DDR4 memory and its controller are vendor parts.
module farm_buffer #(
  parameter int BUF_LOG2  = 16,
  parameter int MAX_FRAME = 1024,
  parameter int NFR_LOG2  = 6
) (
  input  logic            clk,
  input  logic            rst,
  input  logic            in_valid,
  output logic            in_ready,
  input  daq_pkg::lword_t in_word,
  output logic            fwd_valid,
  input  logic            fwd_ready,
  output daq_pkg::lword_t fwd_word,
  output logic            hit_valid,
  input  logic            hit_ready,
  output daq_pkg::lword_t hit_word,
  input  logic            sel_valid,
  input  logic            sel_keep,
  output logic            sel_ready,
  output logic            ro_valid,
  input  logic            ro_ready,
  output daq_pkg::lword_t ro_word,
  output logic [31:0]     frames_local,
  output logic [31:0]     frames_fwd,
  output logic [15:0]     trunc_cnt
);
  import daq_pkg::*;
  localparam int AW = BUF_LOG2;
  localparam int NF = 1 << NFR_LOG2;
  lword_t      buf_mem [1 << AW];
  logic [AW:0] ft_start [NF];
  logic [AW:0] ft_len   [NF];
  logic [NFR_LOG2:0] ft_wp, ft_rp;
  logic [AW:0] wp, rp, fstart, flen, ra, rend;
  logic        in_frame, local_f, ro_busy;
  logic        is_trl, is_cpix, ft_full, room, dec_local;
  logic        fwd_free, hit_free, ro_free;

  assign is_trl   = in_word.k && in_word.data[31:24] == K28_4;
  assign is_cpix  = !in_word.k && in_word.data[31:28] == 4'b0000;   // pixel, switching board 0
  assign ft_full  = (ft_wp - ft_rp) == (NFR_LOG2+1)'(NF);
  assign room     = ((AW+1)'(1 << AW) - (wp - rp)) >= (AW+1)'(MAX_FRAME);
  assign dec_local = in_frame ? local_f : (room && !ft_full);
  assign fwd_free = !fwd_valid || fwd_ready;
  assign hit_free = !hit_valid || hit_ready;
  assign ro_free  = !ro_valid || ro_ready;
  assign in_ready = dec_local ? hit_free : fwd_free;

  // input side
  always_ff @(posedge clk) begin
    if (rst) begin
      wp <= '0; ft_wp <= '0; in_frame <= 1'b0; local_f <= 1'b0; fstart <= '0; flen <= '0;
      fwd_valid <= 1'b0; fwd_word <= '0; hit_valid <= 1'b0; hit_word <= '0;
      frames_local <= '0; frames_fwd <= '0; trunc_cnt <= '0;
    end else begin
      if (fwd_valid && fwd_ready) fwd_valid <= 1'b0;
      if (hit_valid && hit_ready) hit_valid <= 1'b0;
      if (in_valid && in_ready) begin
        in_frame <= !is_trl;
        local_f  <= dec_local;
        if (dec_local) begin
          logic [AW:0] len_now;
          len_now = in_frame ? flen : '0;
          if (!in_frame) fstart <= wp;
          if (len_now < (AW+1)'(MAX_FRAME - 1) || is_trl) begin
            buf_mem[wp[AW-1:0]] <= in_word;
            wp   <= wp + 1'b1;
            flen <= len_now + 1'b1;
          end else if (trunc_cnt != '1) trunc_cnt <= trunc_cnt + 1'b1;
          if (is_cpix || is_trl) begin
            hit_valid <= 1'b1;
            hit_word  <= in_word;
          end
          if (is_trl) begin
            ft_start[ft_wp[NFR_LOG2-1:0]] <= in_frame ? fstart : wp;
            ft_len[ft_wp[NFR_LOG2-1:0]]   <= len_now + 1'b1;
            ft_wp        <= ft_wp + 1'b1;
            frames_local <= frames_local + 1'b1;
          end
        end else begin
          fwd_valid <= 1'b1;
          fwd_word  <= in_word;
          if (is_trl) frames_fwd <= frames_fwd + 1'b1;
        end
      end
    end
  end

  // selection and readout side
  assign sel_ready = !ro_busy && (ft_wp != ft_rp);

  always_ff @(posedge clk) begin
    if (rst) begin
      rp <= '0; ft_rp <= '0; ro_busy <= 1'b0; ra <= '0; rend <= '0;
      ro_valid <= 1'b0; ro_word <= '0;
    end else begin
      if (ro_valid && ro_ready) ro_valid <= 1'b0;
      if (sel_valid && sel_ready) begin
        if (sel_keep) begin
          ro_busy <= 1'b1;
          ra      <= ft_start[ft_rp[NFR_LOG2-1:0]];
          rend    <= ft_start[ft_rp[NFR_LOG2-1:0]] + ft_len[ft_rp[NFR_LOG2-1:0]];
        end else begin
          rp    <= ft_start[ft_rp[NFR_LOG2-1:0]] + ft_len[ft_rp[NFR_LOG2-1:0]];
          ft_rp <= ft_rp + 1'b1;
        end
      end else if (ro_busy && ro_free) begin
        ro_valid <= 1'b1;
        ro_word  <= buf_mem[ra[AW-1:0]];
        ra       <= ra + 1'b1;
        if (ra + 1'b1 == rend) begin
          ro_busy <= 1'b0;
          rp      <= rend;
          ft_rp   <= ft_rp + 1'b1;
        end
      end
    end
  end
endmodule
