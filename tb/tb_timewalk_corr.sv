// tb_timewalk_corr: loads a correction table and checks ts_out = ts_in -
// table[tot] for random hits, with all other fields unchanged, the
// one-clock latency, and that reset leaves the correction at zero.
module tb_timewalk_corr;
  import daq_pkg::*;
  logic clk = 0, rst = 1, cfg_we = 0, in_valid = 0, out_valid;
  logic [4:0] cfg_addr = 0;
  logic [3:0] cfg_data = 0;
  hit_t in_hit = '0, out_hit;
  int checks = 0, failures = 0;
  logic [3:0] ref_lut [32];
  timewalk_corr dut (.*);
  always #4 clk = ~clk;
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask
  initial begin
    hit_t h, e;
    repeat (3) @(posedge clk); #1 rst = 0;
    // before configuration the correction is zero
    h = hit_t'({$urandom, $urandom});
    in_hit = h; in_valid = 1; @(posedge clk); #1 in_valid = 0;
    check(out_valid && out_hit == h, "unconfigured table is transparent");
    for (int i = 0; i < 32; i++) begin
      ref_lut[i] = 4'(15 - i / 2);     // larger correction for small ToT
      cfg_we = 1; cfg_addr = 5'(i); cfg_data = ref_lut[i];
      @(posedge clk); #1;
    end
    cfg_we = 0;
    for (int n = 0; n < 300; n++) begin
      h = hit_t'({$urandom, $urandom});
      in_hit = h; in_valid = 1;
      @(posedge clk); #1;
      e = h; e.ts = h.ts - 16'(ref_lut[h.tot]);
      check(out_valid && out_hit == e, $sformatf("tot %0d: ts %h want %h", h.tot, out_hit.ts, e.ts));
    end
    in_valid = 0; @(posedge clk); #1;
    check(!out_valid, "valid follows input");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
