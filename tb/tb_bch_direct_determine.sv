// tb_bch_direct_determine - drives precomputation + error determination for
// T = 4 and T = 3 (M = 8) with the syndromes of random 0..T error patterns
// (plus four-error patterns with S1 = 0 and five-error patterns for T = 4)
// and checks the decided class: the true count, and for three errors the
// cubic form (X^3 + k exactly when S1^5 = S5).
//
// Expected values come from the independent reference in bch_ref_pkg; where
// the published design gives a latency, the cycle count is checked as well.
module tb_bch_direct_determine;
  import bch_ref_pkg::*;
  import bch_pkg::*;

  localparam int M = 8;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [M-1:0] s1, s3, s5, s7, s1_2, d, e, g, delta, c2, c3, c3z;
  logic [M-1:0] t3_s1_2, t3_d, t3_e, t3_g, t3_delta, t3_c2, t3_c3, t3_c3z;
  err_class_e   cls4, cls3;
  int checks = 0;
  int failures = 0;
  int seen [0:6];

  bch_direct_precomp #(.M(M)) u_pre (.*);
  bch_direct_determine #(.M(M), .T(4)) dut4 (.s1, .s3, .s5, .s7, .d, .e, .g, .delta,
                                              .c2, .c3, .c3z, .cls(cls4));
  bch_direct_precomp #(.M(M)) u_pre3 (.s1, .s3, .s5, .s7('0), .s1_2(t3_s1_2), .d(t3_d),
                                      .e(t3_e), .g(t3_g), .delta(t3_delta), .c2(t3_c2),
                                      .c3(t3_c3), .c3z(t3_c3z));
  bch_direct_determine #(.M(M), .T(3)) dut3 (.s1, .s3, .s5, .s7('0), .d(t3_d), .e(t3_e),
                                              .g(t3_g), .delta(t3_delta), .c2(t3_c2),
                                              .c3(t3_c3), .c3z(t3_c3z), .cls(cls3));

  function automatic err_class_e expect_cls(input int n, input word_t err);
    case (n)
      0: return EC_ZERO;
      1: return EC_ONE;
      2: return EC_TWO;
      3: return ((pw(syndrome(err, 1), 5) ^ syndrome(err, 5)) == 0) ? EC_THREE_C : EC_THREE_B;
      4: return EC_FOUR;
      default: return EC_FAIL;
    endcase
  endfunction

  initial begin
    repeat (10000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    word_t err;
    int n;
    ref_init(M);
    for (int i = 0; i < 7; i++) seen[i] = 0;
    for (int w = 0; w < 600; w++) begin
      n = w % 6;
      if (w % 12 == 4) err = rand_err_s1zero();
      else err = rand_err(n, ref_n);
      s1 = M'(syndrome(err, 1)); s3 = M'(syndrome(err, 3));
      s5 = M'(syndrome(err, 5)); s7 = M'(syndrome(err, 7));
      @(posedge clk);
      checks++;
      if (n < 5) begin
        if (cls4 != expect_cls(n, err)) begin
          failures++;
          if (failures < 5) $display("FAIL T=4 n=%0d cls=%0d", n, cls4);
        end
      end else if (cls4 == EC_ZERO) failures++;  // five errors never look clean
      seen[cls4]++;
      if (n <= 3) begin
        checks++;
        if (cls3 != expect_cls(n, err)) begin
          failures++;
          if (failures < 5) $display("FAIL T=3 n=%0d cls=%0d", n, cls3);
        end
      end
    end
    for (int i = 0; i <= 5; i++) if (i != int'(EC_THREE_C)) begin
      checks++;
      if (seen[i] == 0) begin failures++; $display("class %0d never seen", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
