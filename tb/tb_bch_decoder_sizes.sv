// tb_bch_decoder_sizes - the top level at the other code sizes and
// architectures of the evaluation: block lengths N = 16 .. 1024 (M = 4 .. 10)
// with T = 2, 3, 4 for the direct and the conventional decoder, and the
// conventional decoder for T = 6 at N = 256. The configurations run one
// after another (each harness is released from reset when the previous one
// has finished, because the reference field is shared). Each checks
// correction, T+1 detection and the latency (3 / 4 / 8 cycles direct,
// 2T + 2 conventional), and every error count 0 .. T+1 must occur.
//
// Expected values come from the independent reference in bch_ref_pkg; where
// the published design gives a latency, the cycle count is checked as well.
module tb_bch_decoder_sizes;
  localparam int NCFG = 10;
  // configuration table: M, T, DIRECT, latency
  localparam int CM [NCFG] = '{4, 4, 5, 6, 6, 7, 8, 9, 10, 10};
  localparam int CT [NCFG] = '{2, 3, 3, 4, 4, 4, 6, 2, 4, 2};
  localparam bit CD [NCFG] = '{1, 0, 1, 1, 0, 1, 0, 1, 1, 0};
  localparam int CL [NCFG] = '{3, 8, 4, 8, 10, 8, 14, 3, 8, 6};
  localparam int NW = 150;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n [NCFG];
  logic done  [NCFG];
  int   hc    [NCFG];
  int   hf    [NCFG];
  int   seen  [NCFG];  // number of error counts 0..T+1 that occurred
  int   checks = 0;
  int   failures = 0;

  for (genvar k = 0; k < NCFG; k++) begin : g_cfg
    int ne [0:CT[k]+1];
    int par, ff, bub, z;
    int qc [0:3];
    bch_dec_harness #(.M(CM[k]), .T(CT[k]), .KIND(2), .DIRECT(CD[k]), .LAT(CL[k]), .NW(NW)) h (
      .clk, .rst_n(rst_n[k]), .done(done[k]), .checks(hc[k]), .failures(hf[k]), .n_err(ne),
      .n_par_err(par), .n_fail_flag(ff), .n_bubble(bub), .n_s1zero(z), .n_qcase(qc));
    always_comb begin
      seen[k] = 0;
      for (int i = 0; i <= CT[k] + 1; i++) if (ne[i] > 0) seen[k]++;
    end
  end

  function automatic int sum(input int v [NCFG]);
    int s = 0;
    foreach (v[i]) s += v[i];
    return s;
  endfunction

  initial begin
    #20000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks + sum(hc), failures + sum(hf) + 1);
    $finish;
  end

  initial begin
    foreach (rst_n[k]) rst_n[k] = 1'b0;
    for (int k = 0; k < NCFG; k++) begin
      repeat (3) @(negedge clk);
      rst_n[k] = 1'b1;
      wait (done[k]);
      checks++;
      if (seen[k] != CT[k] + 2) begin
        failures++;
        $display("FAIL: M=%0d T=%0d DIRECT=%0d: not every error count occurred", CM[k], CT[k], CD[k]);
      end
      $display("N=%0d T=%0d %s: %0d checks, %0d failures", 2**CM[k], CT[k],
               CD[k] ? "direct" : "conventional", hc[k], hf[k]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks + sum(hc), failures + sum(hf));
    $finish;
  end

endmodule
