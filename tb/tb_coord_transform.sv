// tb_coord_transform: loads random Q16.16 sensor constants for 8 sensors,
// sends random pixel words and trailers with random back-pressure, and
// compares x, y, z with the same affine map evaluated in floating point
// (tolerance of one unit in the last place of the truncating conversion).
// Trailers must come out with zero coordinates.
module tb_coord_transform;
  import daq_pkg::*;
  localparam int SL = 3;
  logic clk = 0, rst = 1, cfg_we = 0, in_valid = 0, in_ready, out_valid, out_ready = 1;
  logic [SL+3:0] cfg_addr = 0;
  logic [31:0] cfg_data = 0;
  lword_t in_word = '0;
  logic [127:0] out_data;
  int checks = 0, failures = 0;
  int c [1 << SL][9];
  coord_transform #(.SENS_LOG2(SL)) dut (.*);
  always #4 clk = ~clk;
  initial begin
    #100000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask
  function automatic real fval(input logic [31:0] b);
    int e; real m;
    if (b[30:0] == 0) return 0.0;
    e = int'(b[30:23]) - 127;
    m = 1.0 + real'(b[22:0]) / 8388608.0;
    return (b[31] ? -m : m) * (2.0 ** e);
  endfunction

  lword_t exp_q [$];
  always @(posedge clk) begin
    out_ready <= ($urandom % 3) != 0;
    if (out_valid && out_ready) begin
      lword_t w; w = exp_q.pop_front();
      check(out_data[127:96] == w.data, "word passed on");
      if (w.k) check(out_data[95:0] == 0, "trailer without coordinates");
      else begin
        int s, col, row;
        s = int'(w.data[16 +: SL]); col = int'(w.data[15:8]); row = int'(w.data[7:0]);
        for (int k = 0; k < 3; k++) begin
          real want, got;
          want = (real'(c[s][k]) + real'(c[s][3+k]) * col + real'(c[s][6+k]) * row) / 65536.0;
          got  = fval(out_data[95 - 32*k -: 32]);
          check((want - got) <= (want < 0 ? -want : want) * 2.5e-7 + 1e-9 &&
                (got - want) <= (want < 0 ? -want : want) * 2.5e-7 + 1e-9,
                $sformatf("sensor %0d coord %0d: %f want %f", s, k, got, want));
        end
      end
    end
  end
  initial begin
    repeat (3) @(posedge clk); #1 rst = 0;
    for (int s = 0; s < (1 << SL); s++)
      for (int k = 0; k < 9; k++) begin
        // offsets up to +-300 mm, pitch terms up to +-0.1 mm per pixel
        c[s][k] = (k < 3) ? int'($urandom % 39321600) - 19660800 : int'($urandom % 13108) - 6554;
        #1 cfg_we = 1; cfg_addr = {SL'(s), 4'(k)}; cfg_data = c[s][k];
        @(posedge clk);
      end
    #1 cfg_we = 0;
    for (int n = 0; n < 2000; n++) begin
      lword_t w;
      if ($urandom % 10 == 0) w = '{k: 1'b1, data: trailer_word(24'(n))};
      else w = '{k: 1'b0, data: {4'h0, 9'($urandom), SL'($urandom), 8'($urandom), 8'($urandom)}};
      #1 in_valid = 1; in_word = w;
      do @(posedge clk); while (!in_ready);
      exp_q.push_back(w);
      #1 in_valid = 0;
    end
    repeat (50) @(posedge clk);
    check(exp_q.size() == 0, "all words out");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
