// tb_nmpu_post: tests the sum and output stage for the three second-stage
// methods, with and without ReLU, against the integer reference: hand-worked
// values, the saturation corners and random branch values and offsets.
// Counts that sum saturation, round saturation and the ReLU all occur.
module tb_nmpu_post;
  import nmpu_pkg::*;
  import nmpu_ref_pkg::*;

  logic signed [10:0] br_p, br_n;
  logic signed [7:0]  offset;
  logic               relu_en;
  logic signed [7:0]  y1, y2, y3;
  logic               ss1, sr1, rz1, ss2, sr2, rz2, ss3, sr3, rz3;
  int checks = 0, failures = 0, n_sat_sum = 0, n_sat_round = 0, n_relu = 0;

  nmpu_post #(.METHOD(RND2_CUT))  u1 (.br_p, .br_n, .offset, .relu_en, .dout(y1), .sat_sum(ss1), .sat_round(sr1), .relu_zero(rz1));
  nmpu_post #(.METHOD(RND2_POS))  u2 (.br_p, .br_n, .offset, .relu_en, .dout(y2), .sat_sum(ss2), .sat_round(sr2), .relu_zero(rz2));
  nmpu_post #(.METHOD(RND2_BOTH)) u3 (.br_p, .br_n, .offset, .relu_en, .dout(y3), .sat_sum(ss3), .sat_round(sr3), .relu_zero(rz3));

  task automatic chk(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10)
        $display("FAIL %s p=%0d n=%0d off=%0d relu=%0d got %0d exp %0d", what, br_p, br_n, offset, relu_en, got, exp);
    end
  endtask

  // reference from branch magnitudes: sum in quarter units
  function automatic int ref_out(int p, int n, int off, bit relu, int m, output bit ssum, output bit srnd, output bit rz);
    int s = p - n + 2 * off;
    int y;
    ssum = s > 511 || s < -512;
    if (s > 511) s = 511;
    if (s < -512) s = -512;
    case (m)
      2: y = (s >= 0) ? floor_div4(s + 2) : floor_div4(s);
      3: y = floor_div4(s + 2);
      default: y = floor_div4(s);
    endcase
    srnd = y > 127;
    if (y > 127) y = 127;
    rz = relu && y < 0;
    return rz ? 0 : y;
  endfunction

  task automatic apply(int p, int n, int off, bit relu);
    bit a, b, c;
    int e;
    br_p = 11'(p); br_n = 11'(-n); offset = 8'(off); relu_en = relu;
    #1;
    e = ref_out(p, n, off, relu, 1, a, b, c);
    chk(int'(y1), e, "I"); chk(int'(ss1), int'(a), "sat_sum"); chk(int'(sr1), int'(b), "sat_round"); chk(int'(rz1), int'(c), "relu");
    if (a) n_sat_sum++;
    if (c) n_relu++;
    e = ref_out(p, n, off, relu, 2, a, b, c);
    chk(int'(y2), e, "II"); chk(int'(sr2), int'(b), "sat_round II");
    e = ref_out(p, n, off, relu, 3, a, b, c);
    chk(int'(y3), e, "III"); chk(int'(sr3), int'(b), "sat_round III");
    if (b) n_sat_round++;
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // hand-worked: 10.75 - 3.0 + 1.5 = 9.25 -> I: 9, II: 9, III: 9
    apply(43, 12, 3, 1'b1); chk(int'(y1), 9, "hand a"); chk(int'(y3), 9, "hand a3");
    // 2.5 - 0 + 0 -> I: 2, II: 3, III: 3
    apply(10, 0, 0, 1'b0); chk(int'(y1), 2, "hand b1"); chk(int'(y2), 3, "hand b2"); chk(int'(y3), 3, "hand b3");
    // 0 - 2.5 -> I: -3, II: -3 (cut), III: -2; ReLU gives 0
    apply(0, 10, 0, 1'b0); chk(int'(y1), -3, "hand c1"); chk(int'(y2), -3, "hand c2"); chk(int'(y3), -2, "hand c3");
    apply(0, 10, 0, 1'b1); chk(int'(y1), 0, "hand relu");
    // 255.75 - 0 + 63.5 saturates to 127; -255.75 - 64 saturates to -128
    apply(1023, 0, 127, 1'b0); chk(int'(y1), 127, "hand max");
    apply(0, 1023, -128, 1'b0); chk(int'(y1), -128, "hand min");
    // 127.5 -> III rounds to 128 -> saturates to 127
    apply(510, 0, 0, 1'b0); chk(int'(y3), 127, "hand round sat");
    for (int i = 0; i < 20000; i++)
      apply($urandom_range(0, 1023) >> $urandom_range(0, 3), $urandom_range(0, 1023) >> $urandom_range(0, 3),
            $urandom_range(0, 255) - 128, 1'($urandom_range(0, 1)));
    checks++;
    if (n_sat_sum == 0 || n_sat_round == 0 || n_relu == 0) begin
      failures++;
      $display("FAIL coverage");
    end
    $display("coverage sat_sum=%0d sat_round=%0d relu=%0d", n_sat_sum, n_sat_round, n_relu);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
