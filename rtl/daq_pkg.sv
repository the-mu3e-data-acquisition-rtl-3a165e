// daq_pkg: types, constants and the 8b/10b coding tables shared by the
// readout chain. The time base is the 125 MHz system clock, one time stamp
// bin per clock (8 ns); eight bins make one 64 ns reconstruction frame.
// The link-word layouts below are this design's own; the readout chain
// only needs three hit kinds with fixed sizes, which these words carry.
//
// 32-bit word on the 6.25 Gbit/s front-end and 10 Gbit/s farm links
// (k = 0 data, k = 1 control):
//   pixel hit      k=0  {2'b00, tsf[2:0], chip[5:0], col[7:0], row[7:0], tot[4:0]}
//   fibre cluster  k=0  {2'b01, tsf[2:0], 12'b0, chan[9:0], size[4:0]}
//   monitoring     k=0  {2'b10, chip[5:0], 8'b0, payload[15:0]}
//   frame trailer  k=1  {K28.4, frame[23:0]}   closes a 64 ns frame
// tsf is the time stamp bin within the frame.
package daq_pkg;

  localparam int TS_W       = 16;   // global time stamp, 8 ns bins
  localparam int FRAME_LOG2 = 3;    // 8 bins = 64 ns per frame

  // 8b/10b control characters (8-bit values, sent with k = 1)
  localparam logic [7:0] K28_0 = 8'h1C;  // ASIC hit packet start
  localparam logic [7:0] K28_3 = 8'h7C;  // ASIC monitoring packet start
  localparam logic [7:0] K28_4 = 8'h9C;  // frame trailer
  localparam logic [7:0] K28_5 = 8'hBC;  // comma / idle

  // Reset-stream datagrams (8-bit values, sent with k = 0). The reset
  // stream idles with K28.5; any data byte is a transition.
  localparam logic [7:0] RS_RUN_PREPARE = 8'h10;
  localparam logic [7:0] RS_RUN_START   = 8'h12;
  localparam logic [7:0] RS_RUN_STOP    = 8'h13;
  localparam logic [7:0] RS_RESET       = 8'h30;

  localparam logic [1:0] W_PIX = 2'b00, W_FIB = 2'b01, W_MON = 2'b10;

  // Hit inside a front-end FPGA, after time stamp extension.
  typedef struct packed {
    logic [TS_W-1:0] ts;
    logic [5:0]      chip;
    logic [7:0]      col;    // column, or channel for a MuTRiG
    logic [7:0]      row;
    logic [4:0]      tot;    // time over threshold
  } hit_t;

  // Word on an FPGA-to-FPGA link.
  typedef struct packed {
    logic        k;
    logic [31:0] data;
  } lword_t;

  // Item between the front-end processing stages and the link packer:
  // a formatted data word, and/or the end of a frame.
  typedef struct packed {
    logic        has_word;
    logic [31:0] word;
    logic        frame_end;
    logic [23:0] frame;
  } item_t;

  // Front-end detector flavours (one firmware, selected per board)
  typedef enum logic [1:0] {DET_PIXEL, DET_FIBRE, DET_TILE} det_t;

  function automatic logic [31:0] pix_word(input hit_t h);
    return {W_PIX, h.ts[FRAME_LOG2-1:0], h.chip, h.col, h.row, h.tot};
  endfunction

  function automatic logic [31:0] fib_word(input logic [2:0] tsf, input logic [9:0] chan,
                                           input logic [4:0] size);
    return {W_FIB, tsf, 12'd0, chan, size};
  endfunction

  // Words after a switching board (farm link). Pixel hits are rewritten to
  // the 32-bit sensor/column/row form {1'b0, swb[2:0], feb[5:0], chip[5:0],
  // col[7:0], row[7:0]}; fibre clusters to {1'b1, tsf[2:0], feb[5:0],
  // coinc, tsf_other[2:0], 3'b0, chan[9:0], size[4:0]}. Monitoring words
  // do not leave the switching board.
  function automatic logic [31:0] swb_word(input logic [31:0] w, input logic [2:0] swb,
                                           input logic [5:0] feb);
    if (w[31:30] == W_PIX) return {1'b0, swb, feb, w[26:21], w[20:13], w[12:5]};
    else                   return {1'b1, w[29:27], feb, 7'd0, w[14:0]};
  endfunction

  function automatic logic [31:0] trailer_word(input logic [23:0] frame);
    return {K28_4, frame};
  endfunction

  // ---------------------------------------------------------------------
  // 8b/10b (Widmer/Franaszek). Symbol bit 9 is 'a', bit 0 is 'j'.
  // rd = 0 means running disparity negative.
  // ---------------------------------------------------------------------
  typedef struct packed {
    logic [9:0] sym;
    logic       rd;
  } enc_t;

  function automatic logic [5:0] tbl6(input logic [4:0] x);
    case (x)
      5'd0: return 6'b100111;  5'd1: return 6'b011101;  5'd2: return 6'b101101;
      5'd3: return 6'b110001;  5'd4: return 6'b110101;  5'd5: return 6'b101001;
      5'd6: return 6'b011001;  5'd7: return 6'b111000;  5'd8: return 6'b111001;
      5'd9: return 6'b100101;  5'd10: return 6'b010101; 5'd11: return 6'b110100;
      5'd12: return 6'b001101; 5'd13: return 6'b101100; 5'd14: return 6'b011100;
      5'd15: return 6'b010111; 5'd16: return 6'b011011; 5'd17: return 6'b100011;
      5'd18: return 6'b010011; 5'd19: return 6'b110010; 5'd20: return 6'b001011;
      5'd21: return 6'b101010; 5'd22: return 6'b011010; 5'd23: return 6'b111010;
      5'd24: return 6'b110011; 5'd25: return 6'b100110; 5'd26: return 6'b010110;
      5'd27: return 6'b110110; 5'd28: return 6'b001110; 5'd29: return 6'b101110;
      5'd30: return 6'b011110; default: return 6'b101011;
    endcase
  endfunction

  function automatic logic [3:0] tbl4(input logic [2:0] y);
    case (y)
      3'd0: return 4'b1011; 3'd1: return 4'b1001; 3'd2: return 4'b0101;
      3'd3: return 4'b1100; 3'd4: return 4'b1101; 3'd5: return 4'b1010;
      3'd6: return 4'b0110; default: return 4'b1110;
    endcase
  endfunction

  function automatic logic [3:0] tbl4k(input logic [2:0] y);
    case (y)
      3'd0: return 4'b1011; 3'd1: return 4'b0110; 3'd2: return 4'b1010;
      3'd3: return 4'b1100; 3'd4: return 4'b1101; 3'd5: return 4'b0101;
      3'd6: return 4'b1001; default: return 4'b0111;
    endcase
  endfunction

  function automatic logic k_legal(input logic [7:0] d);
    return (d[4:0] == 5'd28) ||
           (d[7:5] == 3'd7 && (d[4:0] == 5'd23 || d[4:0] == 5'd27 ||
                               d[4:0] == 5'd29 || d[4:0] == 5'd30));
  endfunction

  function automatic enc_t enc_sym(input logic [7:0] d, input logic k, input logic rd);
    logic [5:0] s6a, s6;
    logic [3:0] s4k, s4a, s4d, s4;
    logic       r6, r4, alt;
    logic [4:0] x;
    logic [2:0] y;
    x = d[4:0];
    y = d[7:5];
    // 5b/6b
    s6a = (k && x == 5'd28) ? 6'b001111 : tbl6(x);
    s6  = (rd && ($countones(s6a) != 3 || x == 5'd7)) ? ~s6a : s6a;
    r6  = ($countones(s6) == 3) ? rd : ($countones(s6) > 3);
    // 3b/4b; D.x.A7 replaces D.x.P7 where P7 would make a run of five
    s4k = r6 ? ~tbl4k(y) : tbl4k(y);
    alt = y == 3'd7 && ((!r6 && (x == 5'd17 || x == 5'd18 || x == 5'd20)) ||
                        ( r6 && (x == 5'd11 || x == 5'd13 || x == 5'd14)));
    s4a = alt ? 4'b0111 : tbl4(y);
    s4d = (r6 && ($countones(s4a) != 2 || y == 3'd3)) ? ~s4a : s4a;
    s4  = k ? s4k : s4d;
    r4  = ($countones(s4) == 2) ? r6 : ($countones(s4) > 2);
    return '{sym: {s6, s4}, rd: r4};
  endfunction

  typedef struct packed {
    logic       found;
    logic [7:0] d;
    logic       k;
  } dec_t;

  // Finds the byte whose code at running disparity rd equals sym.
  function automatic dec_t dec_try(input logic [9:0] sym, input logic rd);
    dec_t       res;
    logic       f6, k28;
    logic [4:0] x;
    enc_t       e;
    res = '0;
    f6  = 1'b0;
    k28 = 1'b0;
    x   = '0;
    for (int i = 0; i < 32; i++) begin
      e = enc_sym({3'd0, 5'(i)}, 1'b0, rd);
      if (e.sym[9:4] == sym[9:4]) begin f6 = 1'b1; x = 5'(i); end
    end
    e = enc_sym(K28_0, 1'b1, rd);
    if (e.sym[9:4] == sym[9:4]) begin f6 = 1'b1; k28 = 1'b1; x = 5'd28; end
    if (f6) begin
      for (int j = 0; j < 8; j++) begin
        e = enc_sym({3'(j), x}, k28, rd);
        if (e.sym == sym) begin res.found = 1'b1; res.d = {3'(j), x}; res.k = k28; end
      end
      if (!k28 && k_legal({3'd7, x})) begin
        e = enc_sym({3'd7, x}, 1'b1, rd);
        if (e.sym == sym) begin res.found = 1'b1; res.d = {3'd7, x}; res.k = 1'b1; end
      end
    end
    return res;
  endfunction

endpackage
