// tb_dec8b10b: feeds the decoder with symbols built from a table written
// out here (the 5b/6b and 3b/4b sub-blocks of the published code, RD- and
// RD+ columns), so that the decoder is checked against data independent of
// the encoder. All 256 data bytes at both disparities, then K28.5, then
// single-bit errors which must raise code_err or disp_err.
module tb_dec8b10b;
  logic clk = 0, rst = 1, en = 0;
  logic [9:0] sym = 0;
  logic valid, k, code_err, disp_err;
  logic [7:0] d;
  int checks = 0, failures = 0;
  dec8b10b dut (.*);
  always #4 clk = ~clk;

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [5:0] t6 [32] = '{6'b100111, 6'b011101, 6'b101101, 6'b110001, 6'b110101, 6'b101001,
    6'b011001, 6'b111000, 6'b111001, 6'b100101, 6'b010101, 6'b110100, 6'b001101, 6'b101100,
    6'b011100, 6'b010111, 6'b011011, 6'b100011, 6'b010011, 6'b110010, 6'b001011, 6'b101010,
    6'b011010, 6'b111010, 6'b110011, 6'b100110, 6'b010110, 6'b110110, 6'b001110, 6'b101110,
    6'b011110, 6'b101011};
  logic [3:0] t4 [8] = '{4'b1011, 4'b1001, 4'b0101, 4'b1100, 4'b1101, 4'b1010, 4'b0110, 4'b1110};

  // Independent model of the code: rd = 0 negative.
  function automatic logic [10:0] code(input logic [7:0] b, input logic rd);
    logic [5:0] s6; logic [3:0] s4; logic r; int x, y;
    x = b[4:0]; y = b[7:5];
    s6 = t6[x];
    if (rd && (s6 != 6'b110001 && s6 != 6'b101001 && s6 != 6'b011001 && s6 != 6'b100101 &&
               s6 != 6'b010101 && s6 != 6'b110100 && s6 != 6'b101100 && s6 != 6'b011100 &&
               s6 != 6'b100011 && s6 != 6'b010011 && s6 != 6'b110010 && s6 != 6'b001011 &&
               s6 != 6'b101010 && s6 != 6'b011010 && s6 != 6'b001101 && s6 != 6'b100110 &&
               s6 != 6'b010110 && s6 != 6'b001110)) s6 = ~s6;
    r = (s6 == t6[x] && x != 7 && $countones(s6) == 3) ? rd : ~rd;
    if (x == 7) r = rd;
    s4 = t4[y];
    if (y == 7 && ((!r && (x == 17 || x == 18 || x == 20)) || (r && (x == 11 || x == 13 || x == 14))))
      s4 = 4'b0111;
    if (r && (y == 0 || y == 3 || y == 4 || y == 7)) s4 = ~s4;
    if (y == 0 || y == 4 || y == 7) r = ~r;
    return {s6, s4, r};
  endfunction

  logic [7:0] exp_d; logic exp_k;
  int bad;
  logic [10:0] c;
  logic rd;
  initial begin
    repeat (3) @(posedge clk);
    #1 rst = 0;
    rd = 0;
    for (int i = 0; i < 512; i++) begin
      c = code(8'(i), rd);
      sym = c[10:1]; en = 1; rd = c[0];
      @(posedge clk); #1;
      checks++;
      if (!valid || d !== 8'(i) || k || code_err || disp_err) begin
        failures++;
        $display("FAIL byte %02h sym %b: d=%02h k=%b ce=%b de=%b", 8'(i), sym, d, k, code_err, disp_err);
      end
    end
    sym = rd ? 10'b1100000101 : 10'b0011111010; // K28.5, balanced-out
    @(posedge clk); #1;
    checks++;
    if (d !== 8'hBC || !k || code_err || disp_err) begin
      failures++; $display("FAIL K28.5 d=%02h k=%b", d, k);
    end
    rd = ~rd;
    // disparity error: send a D0.0 of the wrong column
    c = code(8'h00, ~rd);
    sym = c[10:1];
    @(posedge clk); #1;
    checks++;
    if (!disp_err || code_err) begin failures++; $display("FAIL wrong-disparity symbol not flagged"); end
    // non-code words: all zeros and all ones
    sym = 10'b0000000000; @(posedge clk); #1;
    checks++; if (!code_err) begin failures++; $display("FAIL 0000000000 not flagged"); end
    sym = 10'b1111111111; @(posedge clk); #1;
    checks++; if (!code_err) begin failures++; $display("FAIL 1111111111 not flagged"); end
    sym = 10'b1111100000; @(posedge clk); #1;
    checks++; if (!code_err) begin failures++; $display("FAIL 1111100000 not flagged"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
