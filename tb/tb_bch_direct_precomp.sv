// tb_bch_direct_precomp - compares every output of the precomputation block
// (M = 8) with the same expressions evaluated by the log/antilog reference
// for random syndrome values, and checks the zero properties on real error
// patterns: d = e = g = 0 for one error, delta = c2 = 0 for two, c3 = 0 for
// three.
//
// Expected values come from the independent reference in bch_ref_pkg; where
// the published design gives a latency, the cycle count is checked as well.
module tb_bch_direct_precomp;
  import bch_ref_pkg::*;

  localparam int M = 8;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [M-1:0] s1, s3, s5, s7, s1_2, d, e, g, delta, c2, c3, c3z;
  int checks = 0;
  int failures = 0;

  bch_direct_precomp #(.M(M)) dut (.*);

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
    int a1, a3, a5, a7, rd, re, rdel;
    word_t err;
    ref_init(M);
    for (int n = 0; n < 500; n++) begin
      a1 = $urandom_range(255, 0); a3 = $urandom_range(255, 0);
      a5 = $urandom_range(255, 0); a7 = $urandom_range(255, 0);
      s1 = M'(a1); s3 = M'(a3); s5 = M'(a5); s7 = M'(a7);
      @(posedge clk);
      rd = pw(a1, 3) ^ a3;
      re = pw(a1, 5) ^ a5;
      rdel = mul(a3, rd) ^ mul(a1, re);
      chk(int'(s1_2) == pw(a1, 2), "s1_2");
      chk(int'(d) == rd, "d");
      chk(int'(e) == re, "e");
      chk(int'(g) == (pw(a1, 7) ^ a7), "g");
      chk(int'(delta) == rdel, "delta");
      chk(int'(c2) == (mul(a1, a7) ^ mul(pw(a1, 2), pw(a3, 2)) ^ mul(a5, rd)), "c2");
      chk(int'(c3) == (mul(mul(a1, a7) ^ mul(pw(a1, 2), pw(a3, 2)) ^ mul(a3, re), rd)
                       ^ mul(a5, pw(rd, 2)) ^ mul(a1, pw(re, 2))), "c3");
      chk(int'(c3z) == (mul(a3, a7) ^ pw(a5, 2)), "c3z");
    end
    for (int n = 0; n < 150; n++) begin
      err = rand_err(n % 3 + 1, ref_n);
      s1 = M'(syndrome(err, 1)); s3 = M'(syndrome(err, 3));
      s5 = M'(syndrome(err, 5)); s7 = M'(syndrome(err, 7));
      @(posedge clk);
      if (n % 3 == 0) chk(d == 0 && e == 0 && g == 0, "one error");
      if (n % 3 == 1) chk(delta == 0 && c2 == 0, "two errors");
      if (n % 3 == 2) chk(c3 == 0, "three errors");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
