// tb_enc8b10b: checks the encoder against code words from the published
// 8b/10b table, checks that the running digital sum of the line stays
// within +-1 at every symbol boundary and that no symbol has more than
// five equal bits in a run across symbols, over all 256 data bytes and
// the twelve control characters.
module tb_enc8b10b;
  logic clk = 0, rst = 1, en = 0, k = 0;
  logic [7:0] d = 0;
  logic [9:0] sym;
  int checks = 0, failures = 0;
  enc8b10b dut (.*);
  always #4 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(input logic [7:0] b, input logic kk);
    d = b; k = kk; en = 1;
    @(posedge clk); #1;
  endtask

  task automatic expect_sym(input logic [9:0] want, input string what);
    checks++;
    if (sym !== want) begin
      failures++;
      $display("FAIL %s: got %b want %b", what, sym, want);
    end
  endtask

  int rds;  // running digital sum
  logic [7:0] kc [12] = '{8'h1C, 8'h3C, 8'h5C, 8'h7C, 8'h9C, 8'hBC, 8'hDC, 8'hFC,
                          8'hF7, 8'hFB, 8'hFD, 8'hFE};
  initial begin
    repeat (3) @(posedge clk);
    checks++;
    if (sym !== 10'b0011111010) begin failures++; $display("FAIL reset symbol %b", sym); end
    #1 rst = 0;
    send(8'hBC, 1); expect_sym(10'b1100000101, "K28.5 RD+ after reset comma");
    // known code words, starting from negative disparity
    send(8'hBC, 1); expect_sym(10'b0011111010, "K28.5 RD-");
    send(8'hBC, 1); expect_sym(10'b1100000101, "K28.5 RD+");
    send(8'h00, 0); expect_sym(10'b1001110100, "D0.0 RD-");
    send(8'hB5, 0); expect_sym(10'b1010101010, "D21.5");
    send(8'h00, 0); expect_sym(10'b1001110100, "D0.0 RD- again (D0.0 is balanced)");
    send(8'hF1, 0); expect_sym(10'b1000110111, "D17.7 RD- (A7)");
    send(8'hF1, 0); expect_sym(10'b1000110001, "D17.7 RD+ (P7)");
    send(8'hF1, 0); expect_sym(10'b1000110111, "D17.7 RD- (A7) again");
    send(8'h3C, 1); expect_sym(10'b1100000110, "K28.1 RD+");
    // running digital sum over all data bytes and control characters
    rst = 1; @(posedge clk); #1 rst = 0;
    rds = 1;
    for (int i = 0; i < 256 + 12; i++) begin
      if (i < 256) send(8'(i), 0); else send(kc[i-256], 1);
      rds += 2 * $countones(sym) - 10;
      checks++;
      if (rds != 1 && rds != -1) begin
        failures++;
        $display("FAIL running disparity %0d after symbol %0d (%b)", rds, i, sym);
      end
      checks++;
      if ($countones(sym) < 4 || $countones(sym) > 6) begin
        failures++;
        $display("FAIL symbol weight %b", sym);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
