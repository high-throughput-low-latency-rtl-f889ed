// tb_bch_direct_decoder - self-checking test of the direct decoder for
// T = 2, 3 and 4 over GF(2^8) (n = 256 eBCH codes), checking correction,
// failure detection and the latencies of 3, 4 and 8 cycles. For T = 4 it also
// records which of the four quartic substitutions were used and requires each
// of them, and each error count 0..T+1, to occur.
//
// Expected values come from the independent reference in bch_ref_pkg; where
// the published design gives a latency, the cycle count is checked as well.
module tb_bch_direct_decoder;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic done2, done3, done4;
  int   c2, f2, c3, f3, c4, f4;
  int   e2 [0:3];
  int   e3 [0:4];
  int   e4 [0:5];
  int   p2, p3, p4, ff2, ff3, ff4, b2, b3, b4, z2, z3, z4;
  int   qc [0:3];
  int   qx2 [0:3];
  int   qx3 [0:3];
  int   checks = 0;
  int   failures = 0;

  bch_dec_harness #(.M(8), .T(2), .KIND(1), .LAT(3), .NW(300)) h2 (
    .clk, .rst_n, .done(done2), .checks(c2), .failures(f2), .n_err(e2),
    .n_par_err(p2), .n_fail_flag(ff2), .n_bubble(b2), .n_s1zero(z2), .n_qcase(qx2));
  bch_dec_harness #(.M(8), .T(3), .KIND(1), .LAT(4), .NW(300)) h3 (
    .clk, .rst_n, .done(done3), .checks(c3), .failures(f3), .n_err(e3),
    .n_par_err(p3), .n_fail_flag(ff3), .n_bubble(b3), .n_s1zero(z3), .n_qcase(qx3));
  bch_dec_harness #(.M(8), .T(4), .KIND(1), .LAT(8), .NW(1500)) h4 (
    .clk, .rst_n, .done(done4), .checks(c4), .failures(f4), .n_err(e4),
    .n_par_err(p4), .n_fail_flag(ff4), .n_bubble(b4), .n_s1zero(z4), .n_qcase(qc));


  task automatic need(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s never exercised", what);
    end
  endtask

  initial begin
    #2000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks + c2 + c3 + c4, failures + f2 + f3 + f4 + 1);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    wait (done2 && done3 && done4);
    for (int i = 0; i <= 3; i++) need(e2[i] > 0, $sformatf("T=2 e=%0d", i));
    for (int i = 0; i <= 4; i++) need(e3[i] > 0, $sformatf("T=3 e=%0d", i));
    for (int i = 0; i <= 5; i++) need(e4[i] > 0, $sformatf("T=4 e=%0d", i));
    for (int i = 0; i < 4; i++) need(qc[i] > 0, $sformatf("quartic case %0d", i));
    need(p4 > 0 && ff4 > 0 && b4 > 0, "parity-bit error / failure flag / idle cycle");
    $display("quartic cases: %0d %0d %0d %0d", qc[0], qc[1], qc[2], qc[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks + c2 + c3 + c4, failures + f2 + f3 + f4);
    $finish;
  end

endmodule
