// tb_bch_direct_k1k2 - reduction of a four-error locator polynomial to a
// depressed quartic (M = 8). Polynomials c (X + X1)(X + X2)(X + X3)(X + X4)
// are built from random distinct non-zero roots: plain random roots,
// roots summing to zero (L3 = 0) and roots with also sigma2 = 0
// (L3 = L2 = 0). Each is streamed into the block one per cycle and the
// outputs are checked exactly two cycles later: the case selection against
// L3/L2/q2 worked out here, no failure, and that Z^4 (+ Z^2) + k1 Z + k2
// vanishes at every transformed root (Z = X, X/s, 1/(X + x0) or
// w/(X + x0)). Polynomials with L4 = 0 must raise the failure flag. Every
// case must occur at least once.
//
// Expected values come from the independent reference in bch_ref_pkg; where
// the published design gives a latency, the cycle count is checked as well.
module tb_bch_direct_k1k2;
  import bch_ref_pkg::*;
  import bch_pkg::*;

  localparam int M = 8;
  localparam int NW = 3000;
  localparam int LAT = 2;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [M-1:0]  lam [0:4];
  logic [M-1:0]  k1, k2, scale, x0;
  quartic_case_e qcase;
  logic          fail;
  int checks = 0;
  int failures = 0;
  int n_case [0:3];
  int n_l4zero = 0;

  bch_direct_k1k2 #(.M(M)) dut (.*);

  typedef struct { int root [4]; int l [5]; bit l4zero; } item_t;
  item_t items [NW];

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 8) $display("FAIL %s", what);
    end
  endtask

  // distinct non-zero roots; mode 1: sum 0, mode 2: sum 0 and sigma2 = 0
  function automatic item_t make_item(input int mode);
    item_t it;
    int s2, c;
    forever begin
      for (int i = 0; i < 4; i++) it.root[i] = $urandom_range(ref_n, 1);
      if (mode > 0) it.root[3] = it.root[0] ^ it.root[1] ^ it.root[2];
      if (it.root[3] == 0) continue;
      if (it.root[0] == it.root[1] || it.root[0] == it.root[2] || it.root[0] == it.root[3] ||
          it.root[1] == it.root[2] || it.root[1] == it.root[3] || it.root[2] == it.root[3])
        continue;
      s2 = 0;
      for (int i = 0; i < 4; i++)
        for (int j = i + 1; j < 4; j++) s2 ^= mul(it.root[i], it.root[j]);
      if (mode == 2 && s2 != 0) continue;
      break;
    end
    c = $urandom_range(ref_n, 1);
    it.l[4] = c;
    it.l[3] = mul(c, it.root[0] ^ it.root[1] ^ it.root[2] ^ it.root[3]);
    it.l[2] = mul(c, s2);
    it.l[1] = mul(c, mul(mul(it.root[0], it.root[1]), it.root[2] ^ it.root[3]) ^
                     mul(mul(it.root[2], it.root[3]), it.root[0] ^ it.root[1]));
    it.l[0] = mul(c, mul(mul(it.root[0], it.root[1]), mul(it.root[2], it.root[3])));
    it.l4zero = 1'b0;
    return it;
  endfunction

  initial begin
    repeat (NW + 100) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    for (int i = 0; i < 4; i++) n_case[i] = 0;
    ref_init(M);
    for (int w = 0; w < NW; w++) begin
      items[w] = make_item(w % 10 == 1 ? 1 : w % 10 == 2 ? 2 : 0);
      if (w % 50 == 7) begin
        items[w].l4zero = 1'b1;
        items[w].l[4] = 0;
      end
    end
    for (int w = 0; w < NW + LAT; w++) begin
      @(negedge clk);
      if (w >= LAT) check(items[w - LAT]);
      if (w < NW) for (int i = 0; i <= 4; i++) lam[i] = M'(items[w].l[i]);
    end
    for (int i = 0; i < 4; i++) begin
      checks++;
      if (n_case[i] == 0) begin failures++; $display("case %0d never seen", i); end
    end
    $display("cases: direct %0d scale %0d inv %0d inv_scale %0d, L4 = 0: %0d",
             n_case[0], n_case[1], n_case[2], n_case[3], n_l4zero);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input item_t it);
    quartic_case_e exp_case;
    int r, x0e, q2, z, p;
    if (it.l4zero) begin
      n_l4zero++;
      chk(fail, "L4 = 0 not flagged");
      return;
    end
    if (it.l[3] == 0) exp_case = (it.l[2] == 0) ? QC_DIRECT : QC_SCALE;
    else begin
      r   = mul(it.l[1], inv(it.l[3]));
      x0e = pw(r, ref_n / 2 + 1);  // square root: a^(2^(m-1)) = a^((n+1)/2)
      q2  = mul(it.l[2], inv(it.l[4])) ^ mul(mul(it.l[3], x0e), inv(it.l[4]));
      exp_case = (q2 == 0) ? QC_INV : QC_INV_SCALE;
      chk(int'(x0) == x0e, "x0");
    end
    n_case[qcase]++;
    chk(qcase == exp_case && !fail, $sformatf("case %0d expected %0d fail %0d", qcase, exp_case, fail));
    for (int i = 0; i < 4; i++) begin
      case (qcase)
        QC_DIRECT:    z = it.root[i];
        QC_SCALE:     z = mul(it.root[i], inv(int'(scale)));
        QC_INV:       z = inv(it.root[i] ^ int'(x0));
        default:      z = mul(int'(scale), inv(it.root[i] ^ int'(x0)));
      endcase
      p = pw(z, 4) ^ mul(int'(k1), z) ^ int'(k2);
      if (quartic_has_z2(qcase)) p ^= pw(z, 2);
      chk(p == 0, $sformatf("case %0d: transformed root %0d not a root", qcase, i));
    end
  endtask
endmodule
