// tb_gf_cube_lut - exhaustive check of {k}_C over GF(2^8), where every
// non-zero cube has three cube roots, and over GF(2^7), where cubing is a
// bijection: valid exactly when three roots exist, the roots match a brute
// force search, and cbrt is a cube root of k whenever one exists.
//
// Expected values come from the independent reference in bch_ref_pkg; where
// the published design gives a latency, the cycle count is checked as well.
module tb_gf_cube_lut;
  import bch_ref_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [7:0] k, r1, r2, r3, cb;
  logic       valid;
  logic [6:0] k7, s1, s2, s3, cb7;
  logic       valid7;
  int checks = 0;
  int failures = 0;

  gf_cube_lut #(.M(8)) dut  (.k(k),  .r1(r1), .r2(r2), .r3(r3), .valid(valid),  .cbrt(cb));
  gf_cube_lut #(.M(7)) dut7 (.k(k7), .r1(s1), .r2(s2), .r3(s3), .valid(valid7), .cbrt(cb7));

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 5) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    int roots [$];
    ref_init(8);
    for (int i = 0; i < 256; i++) begin
      k = 8'(i);
      @(posedge clk);
      roots.delete();
      for (int x = 0; x < 256; x++) if (mul(mul(x, x), x) == i) roots.push_back(x);
      chk(valid == (roots.size() == 3), $sformatf("valid for k=%0d", i));
      if (roots.size() == 3)
        chk(int'(r1) == roots[0] && int'(r2) == roots[1] && int'(r3) == roots[2],
            $sformatf("roots for k=%0d", i));
      if (roots.size() > 0) chk(mul(mul(int'(cb), int'(cb)), int'(cb)) == i, "cbrt M=8");
    end
    ref_init(7);
    for (int i = 0; i < 128; i++) begin
      k7 = 7'(i);
      @(posedge clk);
      chk(!valid7, "M=7 never has three roots");
      chk(mul(mul(int'(cb7), int'(cb7)), int'(cb7)) == i, "cbrt M=7");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
