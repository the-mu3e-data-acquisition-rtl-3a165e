// dec8b10b: 8b/10b decoder with link-error detection, one symbol per clock.
// The front-end FPGA decodes every ASIC link and watches it for coding
// errors; this block gives the byte, the control flag and two error flags:
// code_err when the symbol is not a code word at either disparity, and
// disp_err when it is a code word only at the other running disparity.
// Decoding searches the encoder table (daq_pkg::dec_try) so that encoder
// and decoder cannot disagree. The running disparity is updated from the
// received symbol itself (4 ones or more: positive, balanced: unchanged),
// so one bad symbol does not desynchronise the following ones. Outputs are
// registered: one clock latency from (en, sym) to (valid, d, k, errors).
// d and k are loaded every clock and are meaningful while valid is high.
// d is marked fsm_encoding "none": it is a data byte, and synthesis must
// not re-encode it as a state register where a user compares it.
module dec8b10b (
  input  logic       clk,
  input  logic       rst,
  input  logic       en,
  input  logic [9:0] sym,
  output logic       valid,
  (* fsm_encoding = "none" *)
  output logic [7:0] d,
  output logic       k,
  output logic       code_err,
  output logic       disp_err
);
  import daq_pkg::*;
  logic rd, rd_next;
  dec_t  r_ok, r_other;

  always_comb begin
    r_ok    = dec_try(sym, rd);
    r_other = dec_try(sym, ~rd);
    if ($countones(sym[9:4]) == 3) rd_next = rd;
    else                           rd_next = ($countones(sym[9:4]) > 3);
    if ($countones(sym[3:0]) != 2) rd_next = ($countones(sym[3:0]) > 2);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      rd <= 1'b0; valid <= 1'b0; code_err <= 1'b0; disp_err <= 1'b0;
    end else begin
      valid    <= en;
      code_err <= en && !r_ok.found && !r_other.found;
      disp_err <= en && !r_ok.found && r_other.found;
      if (en) rd <= rd_next;
    end
  end

  // data outputs are loaded every clock; they mean something while valid
  always_ff @(posedge clk) begin
    d <= r_ok.found ? r_ok.d : r_other.d;
    k <= r_ok.found ? r_ok.k : r_other.k;
  end
endmodule
