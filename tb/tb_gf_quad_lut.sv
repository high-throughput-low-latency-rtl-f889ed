// tb_gf_quad_lut - exhaustive check of {k}_A over GF(2^8) against a brute
// force root search: valid exactly when X^2 + X + k has roots, and then both
// outputs are roots and differ by one. Also checks that half of all k are
// solvable.
//
// Expected values come from the independent reference in bch_ref_pkg; where
// the published design gives a latency, the cycle count is checked as well.
module tb_gf_quad_lut;
  import bch_ref_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [7:0] k, y1, y2;
  logic       valid;
  int checks = 0;
  int failures = 0;
  int nvalid = 0;

  gf_quad_lut #(.M(8)) dut (.k(k), .y1(y1), .y2(y2), .valid(valid));

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
    int nr;
    ref_init(8);
    for (int i = 0; i < 256; i++) begin
      k = 8'(i);
      @(posedge clk);
      nr = 0;
      for (int y = 0; y < 256; y++) if ((mul(y, y) ^ y) == i) nr++;
      chk(valid == (nr == 2), $sformatf("valid for k=%0d", i));
      if (valid) begin
        nvalid++;
        chk((mul(int'(y1), int'(y1)) ^ int'(y1)) == i, $sformatf("root y1 for k=%0d", i));
        chk(y2 == (y1 ^ 8'd1), $sformatf("root y2 for k=%0d", i));
      end
    end
    chk(nvalid == 128, "number of solvable k");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
