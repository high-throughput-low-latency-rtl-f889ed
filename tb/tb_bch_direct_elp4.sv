// tb_bch_direct_elp4 - the inversion-free four-error locator polynomial
// (M = 8). For random four-error patterns (a quarter of them with S1 = 0,
// another quarter with S1 = 0 and S3 S5 = 0) the polynomial
// L4 X^4 + L3 X^3 + L2 X^2 + L1 X + L0 built from the syndromes must vanish
// at all four locators alpha^j and have L4 != 0; L3 = S1 L4 is checked too.
//
// Expected values come from the independent reference in bch_ref_pkg; where
// the published design gives a latency, the cycle count is checked as well.
module tb_bch_direct_elp4;
  import bch_ref_pkg::*;

  localparam int M = 8;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [M-1:0] s1, s3, s5, s7, s1_2, d, e, g, delta, c2, c3, c3z;
  logic [M-1:0] lam [0:4];
  int checks = 0;
  int failures = 0;

  bch_direct_precomp #(.M(M)) u_pre (.*);
  bch_direct_elp4 #(.M(M)) dut (.s1, .s3, .s7, .s1_2, .d, .e, .delta, .lam);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 8) $display("FAIL %s", what);
    end
  endtask

  function automatic int eval(input int xv);
    int acc = 0;
    for (int i = 4; i >= 0; i--) acc = mul(acc, xv) ^ int'(lam[i]);
    return acc;
  endfunction

  initial begin
    repeat (10000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    word_t err;
    ref_init(M);
    for (int w = 0; w < 600; w++) begin
      @(negedge clk);
      if (w % 4 == 3) err = rand_err_l23zero();
      else if (w % 4 == 1) err = rand_err_s1zero();
      else err = rand_err(4, ref_n);
      s1 = M'(syndrome(err, 1)); s3 = M'(syndrome(err, 3));
      s5 = M'(syndrome(err, 5)); s7 = M'(syndrome(err, 7));
      #1;
      chk(lam[4] != 0, "L4 = 0");
      chk(int'(lam[3]) == mul(int'(s1), int'(lam[4])), "L3 != S1 L4");
      for (int j = 0; j < ref_n; j++)
        if (err[j]) chk(eval(alpha(j)) == 0, $sformatf("locator alpha^%0d not a root", j));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
