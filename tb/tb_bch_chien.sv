// tb_bch_chien - feeds the parallel Chien search (M = 8, T = 4) with
// locator polynomials prod_l (1 + alpha^j_l X) of random error positions
// (0..4 errors) and checks that exactly the positions j_l are marked.
//
// Expected values come from the independent reference in bch_ref_pkg; where
// the published design gives a latency, the cycle count is checked as well.
module tb_bch_chien;
  import bch_ref_pkg::*;

  localparam int M = 8;
  localparam int T = 4;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [M-1:0]    lam [0:T];
  logic [2**M-2:0] err_vec;
  int checks = 0;
  int failures = 0;

  bch_chien #(.M(M), .T(T)) dut (.lam(lam), .err_vec(err_vec));

  initial begin
    repeat (10000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    word_t err;
    int p [0:T];
    int nw [0:T];
    int xl;
    ref_init(M);
    for (int w = 0; w < 300; w++) begin
      err = rand_err(w % (T + 1), ref_n);
      for (int i = 0; i <= T; i++) p[i] = (i == 0);
      for (int j = 0; j < ref_n; j++) if (err[j]) begin
        xl = alpha(j);
        for (int i = 0; i <= T; i++) nw[i] = p[i] ^ (i > 0 ? mul(xl, p[i-1]) : 0);
        for (int i = 0; i <= T; i++) p[i] = nw[i];
      end
      for (int i = 0; i <= T; i++) lam[i] = M'(p[i]);
      @(posedge clk);
      checks++;
      if (err_vec != err[2**M-2:0]) begin
        failures++;
        if (failures < 5) $display("FAIL pattern %0d", w);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
