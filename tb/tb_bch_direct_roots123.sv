// tb_bch_direct_roots123 - closed-form roots for one to three errors (M = 8).
// Random one-, two- and three-error patterns (three-error patterns of both
// the X^3 + X + k form and, built as S1 + c w^i with w a cube root of unity,
// the X^3 + k form) pass through the precomputation and error determination
// into two copies of the block: MID_REG = 0 (combinational) and MID_REG = 1
// (one register, checked one cycle later). The returned locator set must
// equal the injected one (alpha^-j for the reciprocal one-error form),
// with the right count and no failure. Random non-syndrome inputs with the
// two-error class check that every returned pair solves its quadratic and
// that the failure flag is raised exactly when the pair is missing.
//
// Expected values come from the independent reference in bch_ref_pkg; where
// the published design gives a latency, the cycle count is checked as well.
module tb_bch_direct_roots123;
  import bch_ref_pkg::*;
  import bch_pkg::*;

  localparam int M = 8;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [M-1:0] s1, s3, s5, s1_2, d, e, g, delta, c2, c3, c3z;
  err_class_e   cls, cls_in;
  logic         force_two = 1'b0;
  logic [M-1:0] x [1:3], xr [1:3];
  logic [7:0]   nexp, nexp_r;
  logic         recip, recip_r, fail, fail_r;
  int checks = 0;
  int failures = 0;
  int n_cls [0:6];

  bch_direct_precomp #(.M(M)) u_pre (.s1, .s3, .s5, .s7('0), .s1_2, .d, .e, .g, .delta,
                                     .c2, .c3, .c3z);
  bch_direct_determine #(.M(M), .T(3)) u_det (.s1, .s3, .s5, .s7('0), .d, .e, .g, .delta,
                                               .c2, .c3, .c3z, .cls);
  assign cls_in = force_two ? EC_TWO : cls;

  bch_direct_roots123 #(.M(M), .MID_REG(1'b0)) dut (.clk, .cls(cls_in), .s1, .d, .e,
                                                    .x, .nexp, .recip, .fail);
  bch_direct_roots123 #(.M(M), .MID_REG(1'b1)) dut_r (.clk, .cls(cls_in), .s1, .d, .e,
                                                      .x(xr), .nexp(nexp_r), .recip(recip_r),
                                                      .fail(fail_r));

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 8) $display("FAIL %s", what);
    end
  endtask

  // the sorted locator values of an error pattern (reciprocal for one error)
  function automatic void locs(input word_t err, input bit rcp, output int l [3], output int n);
    n = 0;
    l = '{default: 0};
    for (int j = 0; j < ref_n; j++)
      if (err[j]) begin
        l[n] = rcp ? alpha(ref_n - j) : alpha(j);
        n++;
      end
    l.sort();
  endfunction

  function automatic bit same(input logic [M-1:0] xv [1:3], input int n, input int l [3]);
    int got [3];
    got = '{default: 0};
    for (int i = 0; i < n; i++) got[i] = int'(xv[i+1]);
    got.sort();
    return got == l;
  endfunction

  function automatic word_t three_c_pattern();
    word_t v;
    int a1, c, w, xx [3];
    forever begin
      a1 = $urandom_range(ref_n, 1);
      c  = $urandom_range(ref_n, 1);
      w  = alpha(ref_n / 3);
      xx[0] = a1 ^ c;
      xx[1] = a1 ^ mul(c, w);
      xx[2] = a1 ^ mul(c, mul(w, w));
      if (xx[0] != 0 && xx[1] != 0 && xx[2] != 0) break;
    end
    v = '0;
    for (int i = 0; i < 3; i++) v[gf_log(xx[i])] = 1'b1;
    return v;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    word_t err;
    int l [3], n, pl [3], pn, ne, pne, ok_pair;
    logic [M-1:0] ps1, pd;
    ref_init(M);
    for (int i = 0; i < 7; i++) n_cls[i] = 0;
    pn = -1;
    for (int w = 0; w < 900; w++) begin
      @(negedge clk);
      ne = w % 3 + 1;
      err = (w % 9 == 8) ? three_c_pattern() : rand_err(ne, ref_n);
      s1 = M'(syndrome(err, 1)); s3 = M'(syndrome(err, 3)); s5 = M'(syndrome(err, 5));
      locs(err, ne == 1, l, n);
      #1;
      n_cls[cls]++;
      chk(same(x, n, l) && int'(nexp) == n && !fail && recip == (n == 1),
          $sformatf("comb e=%0d cls=%0d fail=%0d", n, cls, fail));
      // registered copy shows the previous word now
      if (pn > 0) chk(same(xr, pn, pl) && int'(nexp_r) == pn && !fail_r, "registered copy");
      pl = l; pn = n;
    end
    // arbitrary inputs forced into the two-error class
    force_two = 1'b1;
    for (int w = 0; w < 300; w++) begin
      @(negedge clk);
      s1 = M'($urandom_range(ref_n, 1)); s3 = M'($urandom_range(ref_n, 0));
      s5 = M'($urandom_range(ref_n, 0));
      #1;
      ps1 = s1; pd = d;
      if (pd == 0) continue;
      ok_pair = 0;
      // X^2 + S1 X + d/S1 = 0 with two distinct roots
      if (!fail && x[1] != x[2] &&
          (pw(int'(x[1]), 2) ^ mul(int'(ps1), int'(x[1])) ^ mul(int'(pd), inv(int'(ps1)))) == 0 &&
          (pw(int'(x[2]), 2) ^ mul(int'(ps1), int'(x[2])) ^ mul(int'(pd), inv(int'(ps1)))) == 0)
        ok_pair = 1;
      // a solvable quadratic must be solved; an unsolvable one must fail
      pne = 0;
      for (int y = 1; y <= ref_n; y++)
        if ((pw(y, 2) ^ mul(int'(ps1), y) ^ mul(int'(pd), inv(int'(ps1)))) == 0) pne++;
      chk(pne == 2 ? ok_pair == 1 : fail, $sformatf("forced two: roots=%0d fail=%0d", pne, fail));
    end
    for (int i = 1; i <= 4; i++) begin
      checks++;
      if (n_cls[i] == 0) begin failures++; $display("class %0d never seen", i); end
    end
    $display("classes seen: one %0d two %0d three_b %0d three_c %0d",
             n_cls[1], n_cls[2], n_cls[3], n_cls[4]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
