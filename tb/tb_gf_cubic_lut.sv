// tb_gf_cubic_lut - exhaustive check of {k}_B over GF(2^8) against a brute
// force search for the roots of X^3 + X + k: valid exactly when there are
// three distinct roots, and then the outputs are those roots in ascending
// order. Also requires both outcomes to occur.
//
// Expected values come from the independent reference in bch_ref_pkg; where
// the published design gives a latency, the cycle count is checked as well.
module tb_gf_cubic_lut;
  import bch_ref_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [7:0] k, r1, r2, r3;
  logic       valid;
  int checks = 0;
  int failures = 0;
  int nvalid = 0;

  gf_cubic_lut #(.M(8)) dut (.k(k), .r1(r1), .r2(r2), .r3(r3), .valid(valid));

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
      for (int x = 0; x < 256; x++) if ((mul(mul(x, x), x) ^ x) == i) roots.push_back(x);
      chk(valid == (roots.size() == 3), $sformatf("valid for k=%0d", i));
      if (roots.size() == 3) begin
        nvalid++;
        chk(int'(r1) == roots[0] && int'(r2) == roots[1] && int'(r3) == roots[2],
            $sformatf("roots for k=%0d", i));
      end
    end
    chk(nvalid > 0 && nvalid < 256, "both outcomes");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
