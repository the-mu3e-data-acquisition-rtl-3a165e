// coord_transform: transformation of central-pixel hits from the 32-bit
// sensor/column/row form to global detector coordinates, three IEEE-754
// single-precision numbers, on the farm receiving board. Look-up memories
// hold, per sensor, the position of pixel (0,0) and the steps of one
// column and one row, as 9 signed Q16.16 numbers in mm (index 0..2
// origin x,y,z; 3..5 column step; 6..8 row step), written through cfg_*
// at address {sensor, index}. A hit gives
//     r = origin + col * col_step + row * row_step
// computed exactly in fixed point and then converted to float32, rounding
// toward zero. The look-up transformation and the float32 output follow
// the paper; the per-sensor linear form and number format are this
// design's choice. Output words are 128 bits: {hit word, x, y, z}; a
// frame trailer passes as {trailer word, 96'b0}. The sensor index is
// {board[5:0], chip[5:0]} of the hit. One clock latency, valid/ready.
module coord_transform #(
  parameter int SENS_LOG2 = 12
) (
  input  logic            clk,
  input  logic            rst,
  input  logic            cfg_we,
  input  logic [SENS_LOG2+3:0] cfg_addr,
  input  logic [31:0]     cfg_data,
  input  logic            in_valid,
  output logic            in_ready,
  input  daq_pkg::lword_t in_word,
  output logic            out_valid,
  input  logic            out_ready,
  output logic [127:0]    out_data
);
  import daq_pkg::*;
  logic signed [31:0] lut [1 << SENS_LOG2][9];
  logic [SENS_LOG2-1:0] sens;
  logic [7:0]  col, row;
  logic [95:0] xyz;

  function automatic logic [31:0] to_float(input logic signed [47:0] v);
    logic [47:0] m;
    int          p;
    logic [47:0] sh;
    m = v[47] ? 48'(-v) : 48'(v);
    if (m == '0) return 32'd0;
    p = 0;
    for (int i = 0; i < 48; i++) if (m[i]) p = i;
    sh = m << (47 - p);                       // leading one at bit 47
    return {v[47], 8'(127 + p - 16), sh[46:24]};
  endfunction

  always_comb begin
    sens = in_word.data[16 +: SENS_LOG2];
    col  = in_word.data[15:8];
    row  = in_word.data[7:0];
    for (int c = 0; c < 3; c++) begin
      logic signed [47:0] acc;
      acc = 48'(lut[sens][c]) + 48'(lut[sens][3 + c]) * $signed({40'd0, col}) +
            48'(lut[sens][6 + c]) * $signed({40'd0, row});
      xyz[95 - 32*c -: 32] = to_float(acc);
    end
  end

  always_ff @(posedge clk) begin
    if (cfg_we && cfg_addr[3:0] < 4'd9) lut[cfg_addr[SENS_LOG2+3:4]][cfg_addr[3:0]] <= cfg_data;
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0; out_data <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        out_valid <= 1'b1;
        out_data  <= in_word.k ? {in_word.data, 96'd0} : {in_word.data, xyz};
      end
    end
  end
endmodule
