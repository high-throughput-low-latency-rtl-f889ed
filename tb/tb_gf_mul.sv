// tb_gf_mul - exhaustive check of the GF(2^8) multiplier against the
// log/antilog reference (all 65536 operand pairs) and of a GF(2^4) instance.
//
// Expected values come from the independent reference in bch_ref_pkg; where
// the published design gives a latency, the cycle count is checked as well.
module tb_gf_mul;
  import bch_ref_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [7:0] a, b, p;
  logic [3:0] a4, b4, p4;
  int checks = 0;
  int failures = 0;

  gf_mul #(.M(8)) dut  (.a(a),  .b(b),  .p(p));
  gf_mul #(.M(4)) dut4 (.a(a4), .b(b4), .p(p4));

  initial begin
    repeat (100000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    ref_init(8);
    for (int i = 0; i < 256; i++) begin
      for (int j = 0; j < 256; j++) begin
        a = 8'(i);
        b = 8'(j);
        #1;
        checks++;
        if (int'(p) != mul(i, j)) begin
          failures++;
          if (failures < 5) $display("FAIL %0d * %0d = %0d", i, j, p);
        end
      end
      @(posedge clk);
    end
    ref_init(4);
    for (int i = 0; i < 16; i++)
      for (int j = 0; j < 16; j++) begin
        a4 = 4'(i);
        b4 = 4'(j);
        #1;
        checks++;
        if (int'(p4) != mul(i, j)) failures++;
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
