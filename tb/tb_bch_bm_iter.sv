// tb_bch_bm_iter - chains T = 4 BM iterations (M = 8) exactly as the
// conventional decoder does and feeds them the initial state for the
// syndromes of random patterns of 0..4 errors. The final Lambda^(4)(X) must be
// prod_l (1 + X_l X) (X_l = alpha^j_l) with its degree in l^(4), and each word
// must take exactly 2 cycles per iteration. Words are streamed back to back.
//
// Expected values come from the independent reference in bch_ref_pkg; where
// the published design gives a latency, the cycle count is checked as well.
module tb_bch_bm_iter;
  import bch_ref_pkg::*;

  localparam int M  = 8;
  localparam int T  = 4;
  localparam int NC = 2*T;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic              vv  [0:T];
  logic [M-1:0]      ss  [0:T][1:NC];
  logic [M-1:0]      lmu [0:T][0:NC-1];
  logic [M-1:0]      lrh [0:T][0:NC-1];
  logic [M-1:0]      dmu [0:T];
  logic [M-1:0]      drh [0:T];
  logic [7:0]        lm  [0:T];
  logic [7:0]        lr  [0:T];
  logic signed [7:0] r2  [0:T];

  for (genvar mu = 0; mu < T; mu++) begin : g_it
    bch_bm_iter #(.M(M), .T(T), .MU(mu)) u_it (
      .clk, .rst_n, .in_valid(vv[mu]), .s_in(ss[mu]), .lam_mu_in(lmu[mu]),
      .lam_rho_in(lrh[mu]), .d_mu_in(dmu[mu]), .d_rho_in(drh[mu]), .l_mu_in(lm[mu]),
      .l_rho_in(lr[mu]), .rho2_in(r2[mu]), .out_valid(vv[mu+1]), .s_out(ss[mu+1]),
      .lam_mu_out(lmu[mu+1]), .lam_rho_out(lrh[mu+1]), .d_mu_out(dmu[mu+1]),
      .d_rho_out(drh[mu+1]), .l_mu_out(lm[mu+1]), .l_rho_out(lr[mu+1]), .rho2_out(r2[mu+1]));
  end

  int checks = 0;
  int failures = 0;
  int cycle = 0;
  typedef struct { int lam [0:NC-1]; int deg; int stamp; } exp_t;
  exp_t q [$];

  always @(posedge clk) cycle++;

  always @(negedge clk) if (vv[T]) begin
    exp_t x;
    bit ok;
    x = q.pop_front();
    ok = (cycle - x.stamp == 2*T) && (int'(lm[T]) == x.deg);
    for (int i = 0; i < NC; i++) if (int'(lmu[T][i]) != x.lam[i]) ok = 0;
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 5) $display("FAIL deg %0d/%0d latency %0d", lm[T], x.deg, cycle - x.stamp);
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    word_t err;
    exp_t x;
    int e, xl;
    int nw [0:NC-1];
    ref_init(M);
    vv[0] = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int w = 0; w < 300; w++) begin
      @(negedge clk);
      e = w % (T + 1);
      err = rand_err(e, ref_n);
      // reference locator polynomial prod (1 + X_l X)
      for (int i = 0; i < NC; i++) x.lam[i] = (i == 0);
      for (int j = 0; j < ref_n; j++) if (err[j]) begin
        xl = alpha(j);
        for (int i = 0; i < NC; i++) nw[i] = x.lam[i] ^ (i > 0 ? mul(xl, x.lam[i-1]) : 0);
        for (int i = 0; i < NC; i++) x.lam[i] = nw[i];
      end
      x.deg = e;
      x.stamp = cycle;
      q.push_back(x);
      vv[0] = 1'b1;
      for (int i = 1; i <= NC; i++) ss[0][i] = M'(syndrome(err, i));
      for (int i = 0; i < NC; i++) begin
        lmu[0][i] = (i == 0) ? M'(1) : '0;
        lrh[0][i] = (i == 0) ? M'(1) : '0;
      end
      dmu[0] = ss[0][1];
      drh[0] = M'(1);
      lm[0]  = '0;
      lr[0]  = '0;
      r2[0]  = -8'sd1;
    end
    @(negedge clk);
    vv[0] = 1'b0;
    repeat (2*T + 2) @(negedge clk);
    checks++;
    if (q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
