// tb_bch_direct_roots4 - roots of the depressed quartic and the way back to
// the error locators (M = 8). Locator polynomials with four distinct
// non-zero roots (random, summing to zero, or with also sigma2 = 0) go
// through the k1/k2 reduction into this block, one per cycle; exactly four
// cycles later the returned X1..X4 must be the four roots, without failure.
// Random polynomials that are not such products check the other direction:
// the block may report four roots only if they are distinct roots of the
// polynomial, and must report them whenever four distinct roots exist.
//
// Expected values come from the independent reference in bch_ref_pkg; where
// the published design gives a latency, the cycle count is checked as well.
module tb_bch_direct_roots4;
  import bch_ref_pkg::*;
  import bch_pkg::*;

  localparam int M = 8;
  localparam int NW = 2000;
  localparam int LAT = 4;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [M-1:0]  lam [0:4];
  logic [M-1:0]  k1, k2, scale, x0;
  quartic_case_e qcase;
  logic          fail_k, fail;
  logic [M-1:0]  x [1:4];
  int checks = 0;
  int failures = 0;
  int n_case [0:3];
  int n_rand_solved = 0;

  bch_direct_k1k2 #(.M(M)) u_k (.clk, .lam, .k1, .k2, .qcase, .scale, .x0, .fail(fail_k));
  bch_direct_roots4 #(.M(M)) dut (.clk, .k1, .k2, .qcase, .scale, .x0, .fail_in(fail_k),
                                  .x, .fail);

  typedef struct { int root [4]; int l [5]; bit arb; int case_seen; } item_t;
  item_t items [NW];

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 8) $display("FAIL %s", what);
    end
  endtask

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
    it.arb = 1'b0;
    return it;
  endfunction

  function automatic int eval(input int l [5], input int xv);
    int acc = 0;
    for (int i = 4; i >= 0; i--) acc = mul(acc, xv) ^ l[i];
    return acc;
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
      if (w % 5 == 4) begin
        items[w].arb = 1'b1;
        for (int i = 0; i <= 4; i++) items[w].l[i] = $urandom_range(ref_n, 0);
        items[w].l[4] = $urandom_range(ref_n, 1);
      end else items[w] = make_item(w % 5 == 1 ? 1 : w % 5 == 2 ? 2 : 0);
    end
    for (int w = 0; w < NW + LAT; w++) begin
      @(negedge clk);
      if (w >= LAT) check(items[w - LAT]);
      if (w >= LAT - 2 && w - (LAT - 2) < NW && !items[w - (LAT - 2)].arb) n_case[qcase]++;
      if (w < NW) for (int i = 0; i <= 4; i++) lam[i] = M'(items[w].l[i]);
    end
    for (int i = 0; i < 4; i++) begin
      checks++;
      if (n_case[i] == 0) begin failures++; $display("case %0d never seen", i); end
    end
    checks++;
    if (n_rand_solved == 0) begin failures++; $display("no random quartic was solvable"); end
    $display("cases: direct %0d scale %0d inv %0d inv_scale %0d; random quartics solved %0d",
             n_case[0], n_case[1], n_case[2], n_case[3], n_rand_solved);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input item_t it);
    int got [4], want [4], nroots;
    for (int i = 0; i < 4; i++) got[i] = int'(x[i+1]);
    got.sort();
    if (!it.arb) begin
      want = it.root;
      want.sort();
      chk(!fail && got == want, "four roots not recovered");
    end else begin
      nroots = 0;
      for (int y = 1; y <= ref_n; y++) if (eval(it.l, y) == 0) nroots++;
      if (!fail) begin
        n_rand_solved++;
        chk(got[0] != got[1] && got[1] != got[2] && got[2] != got[3] && got[0] != 0 &&
            eval(it.l, got[0]) == 0 && eval(it.l, got[1]) == 0 &&
            eval(it.l, got[2]) == 0 && eval(it.l, got[3]) == 0, "false roots reported");
      end else chk(nroots < 4, "solvable random quartic not solved");
    end
  endtask
endmodule
