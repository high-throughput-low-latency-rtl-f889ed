// tb_bch_conv_decoder - self-checking test of the conventional decoder.
//
// Streams random extended BCH codewords (encoded by the reference model) with
// 0 .. T+1 random bit errors anywhere in the N-bit word, mostly back to back
// with occasional idle cycles. Checks: words with at most T errors come out
// corrected with the right error count and no failure flag; words with T+1
// errors are flagged; every word leaves exactly 2T+2 cycles after it entered
// (one word per cycle throughput).
//
// Expected values come from the independent reference in bch_ref_pkg; where
// the published design gives a latency, the cycle count is checked as well.
module tb_bch_conv_decoder;
  import bch_ref_pkg::*;

  localparam int M   = 8;
  localparam int T   = 4;
  localparam int N   = 2**M;
  localparam int LAT = 2*T + 2;
  localparam int NW  = 400;

  logic         clk = 1'b0;
  logic         rst_n = 1'b0;
  logic         in_valid = 1'b0;
  logic [N-1:0] in_cw = '0;
  logic         out_valid;
  logic [N-1:0] out_cw;
  logic         out_fail;
  logic [7:0]   out_nerr;

  int checks = 0;
  int failures = 0;
  int cycle = 0;
  int seen_err [0:T+1];

  typedef struct { word_t cw; int e; int stamp; } exp_t;
  exp_t q [$];

  bch_conv_decoder #(.M(M), .T(T)) dut (.*);

  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at cycle %0d", what, cycle);
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
        if (x.e <= T) begin
          chk(!out_fail && out_cw == x.cw[N-1:0] && int'(out_nerr) == x.e,
              $sformatf("correction e=%0d fail=%0d nerr=%0d", x.e, out_fail, out_nerr));
        end else if (x.e == T + 1) begin
          chk(out_fail, "T+1 errors not detected");
        end
      end
    end
  end

  initial begin
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    word_t c, err;
    int e;
    ref_init(M);
    for (int i = 0; i <= T + 1; i++) seen_err[i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int w = 0; w < NW; w++) begin
      @(negedge clk);
      if ($urandom_range(9, 0) == 0) begin
        in_valid = 1'b0;
        @(negedge clk);
      end
      c   = rand_codeword(T);
      e   = $urandom_range(T + 1, 0);
      err = rand_err(e, N);
      in_valid = 1'b1;
      in_cw    = c[N-1:0] ^ err[N-1:0];
      q.push_back('{cw: c, e: e, stamp: cycle});
      seen_err[e]++;
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (LAT + 3) @(negedge clk);
    chk(q.size() == 0, "words lost");
    for (int i = 0; i <= T + 1; i++) chk(seen_err[i] > 0, "error count not exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
