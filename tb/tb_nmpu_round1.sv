// tb_nmpu_round1: exhaustive test of the first cut/round stage. Every 13-bit
// input is applied to one instance per method (all five) and compared with
// the integer reference; a few hand-worked cases are checked as well.
module tb_nmpu_round1;
  import nmpu_pkg::*;
  import nmpu_ref_pkg::*;

  logic [12:0] din;
  logic [10:0] d1, d2, d3, d4, d5;
  int checks = 0, failures = 0;

  nmpu_round1 #(.W(13), .R(3), .METHOD(RND1_R))    u1 (.din, .dout(d1));
  nmpu_round1 #(.W(13), .R(3), .METHOD(RND1_GRR))  u2 (.din, .dout(d2));
  nmpu_round1 #(.W(13), .R(3), .METHOD(RND1_GR))   u3 (.din, .dout(d3));
  nmpu_round1 #(.W(13), .R(3), .METHOD(RND1_GRRR)) u4 (.din, .dout(d4));
  nmpu_round1 #(.W(13), .R(3), .METHOD(RND1_CUT))  u5 (.din, .dout(d5));

  task automatic chk(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s din=%b got %0d exp %0d", what, din, got, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 8192; v++) begin
      din = 13'(v);
      #1;
      chk(d1, ref_round1(v, 1), "m1");
      chk(d2, ref_round1(v, 2), "m2");
      chk(d3, ref_round1(v, 3), "m3");
      chk(d4, ref_round1(v, 4), "m4");
      chk(d5, ref_round1(v, 5), "m5");
    end
    // hand-worked: 1.01|100 (G=1, R=1): m1 rounds up, m3 cuts
    din = 13'b00000001_01100; #1;
    chk(d1, 6, "hand m1"); chk(d3, 5, "hand m3");
    // 1.00|011: m1 cuts, m2 rounds (2^-4 set), m4 rounds
    din = 13'b00000001_00011; #1;
    chk(d1, 4, "hand m1b"); chk(d2, 5, "hand m2b"); chk(d4, 5, "hand m4b");
    // all ones: method 1 carries out
    din = '1; #1;
    chk(d1, 1024, "carry");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
