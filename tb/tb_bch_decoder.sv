// tb_bch_decoder - end-to-end test of the top level over GF(2^8): the
// (256, 223) eBCH code (T = 4) with the direct decoder and with the
// conventional decoder, and the direct decoder for T = 1 and T = 2.
// Each harness streams random words with 0 .. T+1 errors, mostly back to
// back, and checks the corrected word, the error count, the failure flag for
// T+1 errors and the fixed latency (8, 2T + 2 = 10, 3 and 3 cycles). The
// test then requires every mechanism to have happened at least once: each
// error count per configuration, an error in the extension (parity) bit,
// detected failures, idle input cycles, and all four quartic substitutions
// of the four-error solver.
//
// Expected values come from the independent reference in bch_ref_pkg; where
// the published design gives a latency, the cycle count is checked as well.
module tb_bch_decoder;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic dd, dc, d1, d2;
  int   cd, fd, cc, fc, c1, f1, c2, f2;
  int   ed [0:5];
  int   ec [0:5];
  int   e1 [0:2];
  int   e2 [0:3];
  int   pd, pc, p1, p2, ffd, ffc, ff1, ff2, bd, bc, b1, b2, zd, zc, z1, z2;
  int   qd [0:3];
  int   qc [0:3];
  int   q1 [0:3];
  int   q2 [0:3];
  int   checks = 0;
  int   failures = 0;

  bch_dec_harness #(.M(8), .T(4), .KIND(2), .DIRECT(1'b1), .LAT(8), .NW(1200)) h_dir (
    .clk, .rst_n, .done(dd), .checks(cd), .failures(fd), .n_err(ed),
    .n_par_err(pd), .n_fail_flag(ffd), .n_bubble(bd), .n_s1zero(zd), .n_qcase(qd));
  bch_dec_harness #(.M(8), .T(4), .KIND(2), .DIRECT(1'b0), .LAT(10), .NW(300)) h_conv (
    .clk, .rst_n, .done(dc), .checks(cc), .failures(fc), .n_err(ec),
    .n_par_err(pc), .n_fail_flag(ffc), .n_bubble(bc), .n_s1zero(zc), .n_qcase(qc));
  bch_dec_harness #(.M(8), .T(1), .KIND(2), .DIRECT(1'b1), .LAT(3), .NW(200)) h_t1 (
    .clk, .rst_n, .done(d1), .checks(c1), .failures(f1), .n_err(e1),
    .n_par_err(p1), .n_fail_flag(ff1), .n_bubble(b1), .n_s1zero(z1), .n_qcase(q1));
  bch_dec_harness #(.M(8), .T(2), .KIND(2), .DIRECT(1'b1), .LAT(3), .NW(200)) h_t2 (
    .clk, .rst_n, .done(d2), .checks(c2), .failures(f2), .n_err(e2),
    .n_par_err(p2), .n_fail_flag(ff2), .n_bubble(b2), .n_s1zero(z2), .n_qcase(q2));

  task automatic need(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s never happened", what);
    end
  endtask

  function automatic int all_checks();
    return checks + cd + cc + c1 + c2;
  endfunction

  function automatic int all_failures();
    return failures + fd + fc + f1 + f2;
  endfunction

  initial begin
    #2000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", all_checks(), all_failures() + 1);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    wait (dd && dc && d1 && d2);
    for (int i = 0; i <= 5; i++) need(ed[i] > 0, $sformatf("direct T=4, %0d errors", i));
    for (int i = 0; i <= 5; i++) need(ec[i] > 0, $sformatf("conventional T=4, %0d errors", i));
    for (int i = 0; i <= 2; i++) need(e1[i] > 0, $sformatf("direct T=1, %0d errors", i));
    for (int i = 0; i <= 3; i++) need(e2[i] > 0, $sformatf("direct T=2, %0d errors", i));
    for (int i = 0; i < 4; i++) need(qd[i] > 0, $sformatf("quartic case %0d", i));
    need(pd > 0 && pc > 0 && p1 > 0 && p2 > 0, "extension-bit error");
    need(ffd > 0 && ffc > 0 && ff1 > 0 && ff2 > 0, "detected failure");
    need(bd > 0 && bc > 0 && b1 > 0 && b2 > 0, "idle input cycle");
    $display("direct T=4: errors 0..5 = %0d %0d %0d %0d %0d %0d, quartic cases %0d %0d %0d %0d",
             ed[0], ed[1], ed[2], ed[3], ed[4], ed[5], qd[0], qd[1], qd[2], qd[3]);
    $display("conventional T=4: errors 0..5 = %0d %0d %0d %0d %0d %0d, failures flagged %0d",
             ec[0], ec[1], ec[2], ec[3], ec[4], ec[5], ffc);
    $display("TB_RESULT checks=%0d failures=%0d", all_checks(), all_failures());
    $finish;
  end

endmodule
