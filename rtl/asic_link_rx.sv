// asic_link_rx: receiver for one 1.25 Gbit/s ASIC link (MuPix or MuTRiG)
// on the front-end FPGA. It 8b/10b-decodes the symbol-aligned stream,
// separates hits from monitoring data, monitors the link, and extends the
// hit time stamp to the board's 16-bit time base.
//
// Link protocol (this design's own; the ASIC protocols are defined
// elsewhere): K28.5 idles; K28.0 opens a hit of 4 data bytes, MSB first,
// {ts[9:0], col[7:0], row[7:0], tot[4:0], p} with even parity over all
// 32 bits; K28.3 opens a monitoring word of 2 data bytes. Anything else
// (a data byte outside a packet, a control character inside one, an
// unknown control character) is a protocol error and aborts the packet.
// Symbols with code or disparity errors abort the packet and are counted.
// Hits with bad parity are dropped and counted.
//
// Time stamp extension: the 10-bit ASIC time stamp is taken as the most
// recent time at or before ts_now with these low bits.
// Timing: hit_valid rises 2 clocks after the last symbol of the packet.
module asic_link_rx #(
  parameter logic [5:0] CHIP = 6'd0   // chip index on this board
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic [9:0]            sym,
  input  logic [daq_pkg::TS_W-1:0] ts_now,
  output logic                  hit_valid,
  output daq_pkg::hit_t         hit,
  output logic                  mon_valid,
  output logic [15:0]           mon,
  output logic [15:0]           code_err_cnt,
  output logic [15:0]           disp_err_cnt,
  output logic [15:0]           parity_err_cnt,
  output logic [15:0]           proto_err_cnt
);
  import daq_pkg::*;
  typedef enum logic [1:0] {P_IDLE, P_HIT, P_MON} pstate_t;
  pstate_t    st;
  logic [1:0] cnt;
  logic [23:0] sh;
  logic valid, k, code_err, disp_err;
  logic [7:0] d;
  logic [31:0] word;
  logic [TS_W-1:0] ts_ext;

  dec8b10b u_dec (.clk, .rst, .en(1'b1), .sym, .valid, .d, .k, .code_err, .disp_err);

  assign word = {sh, d};
  always_comb begin
    ts_ext = {ts_now[TS_W-1:10], word[31:22]};
    if (word[31:22] > ts_now[9:0]) ts_ext = ts_ext - TS_W'(1024);
  end

  function automatic logic [15:0] sat_inc(input logic [15:0] c);
    return (c == 16'hFFFF) ? c : c + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      st <= P_IDLE; cnt <= '0; sh <= '0;
      hit_valid <= 1'b0; hit <= '0; mon_valid <= 1'b0; mon <= '0;
      code_err_cnt <= '0; disp_err_cnt <= '0; parity_err_cnt <= '0; proto_err_cnt <= '0;
    end else begin
      hit_valid <= 1'b0;
      mon_valid <= 1'b0;
      if (valid) begin
        if (code_err || disp_err) begin
          if (code_err) code_err_cnt <= sat_inc(code_err_cnt);
          if (disp_err) disp_err_cnt <= sat_inc(disp_err_cnt);
          st <= P_IDLE;
        end else if (k) begin
          if (st != P_IDLE) proto_err_cnt <= sat_inc(proto_err_cnt);
          cnt <= '0;
          unique case (d)
            K28_0:   st <= P_HIT;
            K28_3:   st <= P_MON;
            K28_5:   st <= P_IDLE;
            default: begin
              st <= P_IDLE;
              if (st == P_IDLE) proto_err_cnt <= sat_inc(proto_err_cnt);
            end
          endcase
        end else begin
          sh  <= {sh[15:0], d};
          cnt <= cnt + 1'b1;
          unique case (st)
            P_IDLE: proto_err_cnt <= sat_inc(proto_err_cnt);
            P_HIT: if (cnt == 2'd3) begin
              st <= P_IDLE;
              if (^word) parity_err_cnt <= sat_inc(parity_err_cnt);
              else begin
                hit_valid <= 1'b1;
                hit <= '{ts: ts_ext, chip: CHIP, col: word[21:14], row: word[13:6], tot: word[5:1]};
              end
            end
            P_MON: if (cnt == 2'd1) begin
              st <= P_IDLE;
              mon_valid <= 1'b1;
              mon <= {sh[7:0], d};
            end
            default: st <= P_IDLE;
          endcase
        end
      end
    end
  end
endmodule
