// bch_dec_harness - stimulus and checker shared by the decoder testbenches.
//
// Streams NW random extended codewords through one decoder (KIND 0: the
// conventional decoder, 1: the direct decoder, 2: the top level with the
// DIRECT parameter, 3: the top level with all parameters at their defaults),
// mostly back to back with occasional idle cycles. Each word carries 0 .. T+1
// random bit errors anywhere in the N-bit word; for T = 4 every fourth
// four-error word has locators summing to zero (half of them also with
// S3 S5 = 0), which steers the quartic solver into its Lambda3 = 0 cases,
// and every eighth has q2 = 0 (the plain reciprocal case), which random
// patterns reach only about once in 256. Every sixteenth word with errors
// has one of them in the extension bit.
// Checks: at most T errors are corrected (word, count, no failure flag),
// T+1 errors are flagged, each word leaves exactly LAT cycles after entering
// and nothing is lost. The reference field is set up when rst_n rises, so
// harnesses of different M may run one after another. Event counters
// record what was exercised; done rises when all words are out.
//
// The latencies checked are the published ones (3 / 4 / 8 direct, 2T + 2
// conventional); the reference is independent of the RTL.
module bch_dec_harness #(
  parameter int M      = 8,
  parameter int T      = 4,
  parameter int KIND   = 1,
  parameter bit DIRECT = 1'b1,
  parameter int LAT    = 8,
  parameter int NW     = 300
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   checks,
  output int   failures,
  output int   n_err [0:T+1],
  output int   n_par_err,
  output int   n_fail_flag,
  output int   n_bubble,
  output int   n_s1zero,
  output int   n_qcase [0:3]
);
  import bch_ref_pkg::*;

  localparam int N = 2**M;

  logic         in_valid = 1'b0;
  logic [N-1:0] in_cw = '0;
  logic         out_valid;
  logic [N-1:0] out_cw;
  logic         out_fail;
  logic [7:0]   out_nerr;

  // quartic case (bch_pkg::quartic_case_e) of each four-error word reaching
  // the last stage of a T = 4 direct decoder
  initial for (int i = 0; i < 4; i++) n_qcase[i] = 0;

  if (KIND == 0) begin : g_conv
    bch_conv_decoder #(.M(M), .T(T)) dut (.*);
  end else if (KIND == 1) begin : g_dir
    bch_direct_decoder #(.M(M), .T(T)) dut (.*);
    if (T == 4) begin : g_probe
      always @(negedge clk)
        if (dut.g_t4.cls_f == bch_pkg::EC_FOUR && dut.v_d) n_qcase[dut.g_t4.u_r4.case2_q]++;
    end
  end else if (KIND == 2) begin : g_top
    bch_decoder #(.M(M), .T(T), .DIRECT(DIRECT)) dut (.*);
    if (T == 4 && DIRECT) begin : g_probe
      always @(negedge clk)
        if (dut.g_direct.u_dec.g_t4.cls_f == bch_pkg::EC_FOUR && dut.g_direct.u_dec.v_d)
          n_qcase[dut.g_direct.u_dec.g_t4.u_r4.case2_q]++;
    end
  end else begin : g_top_default
    bch_decoder dut (.*);
    always @(negedge clk)
      if (dut.g_direct.u_dec.g_t4.cls_f == bch_pkg::EC_FOUR && dut.g_direct.u_dec.v_d)
        n_qcase[dut.g_direct.u_dec.g_t4.u_r4.case2_q]++;
  end

  typedef struct { word_t cw; int e; int stamp; } exp_t;
  exp_t q [$];
  int cycle = 0;

  initial begin
    checks = 0; failures = 0; n_par_err = 0; n_fail_flag = 0; n_bubble = 0; n_s1zero = 0;
    for (int i = 0; i <= T + 1; i++) n_err[i] = 0;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL[M=%0d T=%0d kind=%0d] %s at cycle %0d", M, T, KIND, what, cycle);
    end
  endtask

  always @(posedge clk) cycle++;

  always @(negedge clk) begin
    if (out_valid) begin
      exp_t x;
      if (q.size() == 0) chk(0, "unexpected output");
      else begin
        x = q.pop_front();
        chk(cycle - x.stamp == LAT, $sformatf("latency %0d", cycle - x.stamp));
        if (out_fail) n_fail_flag++;
        if (x.e <= T)
          chk(!out_fail && out_cw == x.cw[N-1:0] && int'(out_nerr) == x.e,
              $sformatf("correction e=%0d fail=%0d nerr=%0d", x.e, out_fail, out_nerr));
        else if (x.e == T + 1)
          chk(out_fail, "T+1 errors not detected");
      end
    end
  end

  initial begin
    word_t c, err;
    int e;
    done = 1'b0;
    @(posedge rst_n);
    ref_init(M);
    for (int w = 0; w < NW; w++) begin
      @(negedge clk);
      if ($urandom_range(9, 0) == 0) begin
        in_valid = 1'b0;
        n_bubble++;
        @(negedge clk);
      end
      c = rand_codeword(T);
      e = $urandom_range(T + 1, 0);
      if (T == 4 && e == 4 && (w % 8) == 0) begin
        err = rand_err_s1zero();
        n_s1zero++;
      end else if (T == 4 && e == 4 && (w % 8) == 4) begin
        err = rand_err_l23zero();
        n_s1zero++;
      end else if (T == 4 && e == 4 && (w % 8) == 2) begin
        err = rand_err_q2zero();
        n_s1zero++;
      end else if (e > 0 && (w % 16) == 5) begin
        err = rand_err(e - 1, N - 1);  // one of the errors in the extension bit
        err[N-1] = 1'b1;
      end else begin
        err = rand_err(e, N);
      end
      if (err[N-1]) n_par_err++;
      in_valid = 1'b1;
      in_cw    = c[N-1:0] ^ err[N-1:0];
      q.push_back('{cw: c, e: e, stamp: cycle});
      n_err[e]++;
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (LAT + 3) @(negedge clk);
    chk(q.size() == 0, "words lost");
    done = 1'b1;
  end

endmodule
