// tb_gf_inv_lut - exhaustive check of the inversion LUT over GF(2^8):
// a * y = 1 for every non-zero a, y = 0 for a = 0.
//
// Expected values come from the independent reference in bch_ref_pkg; where
// the published design gives a latency, the cycle count is checked as well.
module tb_gf_inv_lut;
  import bch_ref_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [7:0] a, y;
  int checks = 0;
  int failures = 0;

  gf_inv_lut #(.M(8)) dut (.a(a), .y(y));

  initial begin
    repeat (10000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    ref_init(8);
    for (int i = 0; i < 256; i++) begin
      a = 8'(i);
      @(posedge clk);
      checks++;
      if (i == 0 ? (y != 0) : (mul(i, int'(y)) != 1)) begin
        failures++;
        if (failures < 5) $display("FAIL inv(%0d) = %0d", i, y);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
