// tb_bch_decoder_full - the top level exactly as shipped: no parameter
// overrides, i.e. the (256, 223) extended BCH code (M = 8, T = 4) with the
// direct decoder. Streams 800 random words with 0 .. 5 errors and checks the
// corrected output, the error count, failure detection for five errors and
// the 8-cycle latency; every error count and every quartic substitution of
// the four-error solver must occur.
//
// Expected values come from the independent reference in bch_ref_pkg; where
// the published design gives a latency, the cycle count is checked as well.
module tb_bch_decoder_full;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic done;
  int   hc, hf, par, ff, bub, z;
  int   ne [0:5];
  int   qc [0:3];
  int   checks = 0;
  int   failures = 0;

  bch_dec_harness #(.M(8), .T(4), .KIND(3), .LAT(8), .NW(800)) h (
    .clk, .rst_n, .done, .checks(hc), .failures(hf), .n_err(ne),
    .n_par_err(par), .n_fail_flag(ff), .n_bubble(bub), .n_s1zero(z), .n_qcase(qc));

  task automatic need(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s never happened", what);
    end
  endtask

  initial begin
    #1000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks + hc, failures + hf + 1);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    wait (done);
    for (int i = 0; i <= 5; i++) need(ne[i] > 0, $sformatf("%0d errors", i));
    for (int i = 0; i < 4; i++) need(qc[i] > 0, $sformatf("quartic case %0d", i));
    need(par > 0 && ff > 0 && bub > 0, "extension-bit error / detected failure / idle cycle");
    $display("errors 0..5 = %0d %0d %0d %0d %0d %0d, quartic cases %0d %0d %0d %0d",
             ne[0], ne[1], ne[2], ne[3], ne[4], ne[5], qc[0], qc[1], qc[2], qc[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks + hc, failures + hf);
    $finish;
  end

endmodule
