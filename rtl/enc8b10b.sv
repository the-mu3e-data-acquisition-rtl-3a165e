// enc8b10b: 8b/10b encoder for one byte per clock, as used on the ASIC
// LVDS links and on the 1.25 Gbit/s reset stream. The code is the standard
// Widmer/Franaszek code the readout relies on; the coding itself is the
// shared function daq_pkg::enc_sym. The running disparity is kept in a
// register; during reset the output is the comma K28.5 (RD-), and the symbol is registered:
// sym appears one clock after (d, k, en). While en is low the disparity
// and the output symbol hold. Bit 9 of sym is the first bit on the wire
// ('a'), which is this design's convention.
module enc8b10b (
  input  logic       clk,
  input  logic       rst,
  input  logic       en,
  input  logic [7:0] d,
  input  logic       k,     // send d as control character K.x.y
  output logic [9:0] sym
);
  import daq_pkg::*;
  logic rd;
  enc_t e;

  always_comb e = enc_sym(d, k, rd);

  always_ff @(posedge clk) begin
    if (rst) begin
      rd  <= 1'b1;            // as if K28.5 RD- had just been sent
      sym <= 10'b0011111010;  // K28.5 RD-
    end else if (en) begin
      rd  <= e.rd;
      sym <= e.sym;
    end
  end
endmodule
