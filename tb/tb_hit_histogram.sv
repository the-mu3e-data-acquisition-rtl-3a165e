// tb_hit_histogram: fills a small histogram with random bins, compares
// every bin with a model, checks the clear sweep, and checks that a
// narrow counter saturates instead of wrapping.
module tb_hit_histogram;
  localparam int BW = 6, CW = 6;
  logic clk = 0, rst = 1, clear = 0, clearing, in_valid = 0;
  logic [BW-1:0] in_bin = 0, rd_addr = 0;
  logic [CW-1:0] rd_data;
  int checks = 0, failures = 0;
  int model [1 << BW];
  hit_histogram #(.BIN_W(BW), .CNT_W(CW)) dut (.*);
  always #4 clk = ~clk;
  initial begin
    #10000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask
  task automatic read_all(input string what);
    for (int b = 0; b < (1 << BW); b++) begin
      #1 rd_addr = BW'(b);
      @(posedge clk); #1;
      check(rd_data == CW'(model[b]), $sformatf("%s bin %0d = %0d want %0d", what, b, rd_data, model[b]));
    end
  endtask
  initial begin
    for (int b = 0; b < (1 << BW); b++) model[b] = 0;
    repeat (3) @(posedge clk); #1 rst = 0;
    wait (!clearing); @(posedge clk);
    read_all("after reset");
    for (int r = 0; r < 3; r++) begin
      repeat (r == 2 ? 3000 : 400) begin
        @(posedge clk); #1;
        in_valid = ($urandom % 3) != 0;
        in_bin = BW'($urandom % 24);          // bins 0..23 only
        if (in_valid && model[in_bin] < (1 << CW) - 1) model[in_bin]++;
      end
      @(posedge clk); #1 in_valid = 0;
      @(posedge clk);
      read_all("filled");
      if (r == 1) begin
        clear = 1; @(posedge clk); #1 clear = 0;
        @(posedge clk); check(clearing, "sweep running");
        wait (!clearing); @(posedge clk);
        for (int b = 0; b < (1 << BW); b++) model[b] = 0;
        read_all("cleared");
      end
    end
    begin
      int sat; sat = 0;
      for (int b = 0; b < 24; b++) if (model[b] == (1 << CW) - 1) sat++;
      check(sat > 0, "some bins saturated");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
