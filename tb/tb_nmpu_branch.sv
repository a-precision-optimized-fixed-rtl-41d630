// tb_nmpu_branch: tests both polarities of an NMPU branch (default formats,
// method 1 and method 4 of the first cut/round stage) against the integer
// reference: all shifts with random codes and scales, the extreme codes and
// scales, and hand-worked values. Counts that each overflow check fires.
module tb_nmpu_branch;
  import nmpu_pkg::*;
  import nmpu_ref_pkg::*;

  logic [9:0]         din;
  logic [7:0]         scale;
  logic [1:0]         shift;
  logic signed [10:0] dp, dn, d4;
  logic               osp, orp, osn, orn, os4, or4;
  int checks = 0, failures = 0, n_ovf_shift = 0, n_ovf_round = 0;

  nmpu_branch #(.METHOD(RND1_R), .NEGATE(1'b0)) u_p (.din, .scale, .shift, .dout(dp), .ovf_shift(osp), .ovf_round(orp));
  nmpu_branch #(.METHOD(RND1_R), .NEGATE(1'b1)) u_n (.din, .scale, .shift, .dout(dn), .ovf_shift(osn), .ovf_round(orn));
  nmpu_branch #(.METHOD(RND1_GRRR), .NEGATE(1'b0)) u_4 (.din, .scale, .shift, .dout(d4), .ovf_shift(os4), .ovf_round(or4));

  task automatic chk(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10)
        $display("FAIL %s din=%0d scale=%0d shift=%0d got %0d exp %0d", what, din, scale, shift, got, exp);
    end
  endtask

  task automatic apply(int d, int s, int sh);
    bit e_os, e_or, e4_os, e4_or;
    int m, m4;
    din = 10'(d); scale = 8'(s); shift = 2'(sh);
    #1;
    m  = ref_branch(d, s, sh, 1, e_os, e_or);
    m4 = ref_branch(d, s, sh, 4, e4_os, e4_or);
    chk(int'(dp), m, "pos");
    chk(int'(dn), -m, "neg");
    chk(int'(d4), m4, "m4");
    chk(int'(osp), int'(e_os), "ovf_shift");
    chk(int'(orp), int'(e_or), "ovf_round");
    if (osp) n_ovf_shift++;
    if (orp) n_ovf_round++;
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // hand-worked: 100 x 1.0 >> 0 = 100.0 -> 400 quarter units
    apply(100, 128, 0); chk(int'(dp), 400, "hand 100");
    // 1023 x 1.0 >> 2 = 255.75 -> 1023 quarters, no overflow
    apply(1023, 128, 2); chk(int'(dp), 1023, "hand 255.75"); chk(int'(osp), 0, "hand no ovf");
    // 3 x 0.1171875 (15/128) = 0.3515625 = 0.01|011 (2^-5 units: 11) -> method 1 cuts to 0.25
    apply(3, 15, 0); chk(int'(dp), 1, "hand round cut");
    // 3 x 0.125 = 0.375 = 0.01|100 -> method 1 rounds up to 0.5
    apply(3, 16, 0); chk(int'(dp), 2, "hand round up");
    // 600 x 1.0 >> 1 = 300 -> saturates to 255.75 via shift overflow
    apply(600, 128, 1); chk(int'(dp), 1023, "hand sat"); chk(int'(osp), 1, "hand ovf");
    // 255.875 rounds past 255.75 -> round overflow: 2047 x 128/128 >> 3 is out of range,
    // use 1023 x 2.0 (255) >> 3 = 255.75; 1023 x 256/255? -> scan for it below
    for (int sh = 0; sh < 4; sh++)
      for (int i = 0; i < 3000; i++) apply($urandom_range(0, 1023), $urandom_range(0, 255), sh);
    for (int d = 0; d < 1024; d += 31)
      for (int s = 0; s < 256; s += 17)
        for (int sh = 0; sh < 4; sh++) apply(d, s, sh);
    // search codes that land in the round overflow window (value in [255.875, 256))
    for (int d = 900; d < 1024; d++) apply(d, 255, 3);
    apply(1023, 255, 0); apply(1023, 0, 0); apply(0, 255, 3);
    checks++;
    if (n_ovf_shift == 0 || n_ovf_round == 0) begin
      failures++;
      $display("FAIL coverage ovf_shift=%0d ovf_round=%0d", n_ovf_shift, n_ovf_round);
    end
    $display("coverage ovf_shift=%0d ovf_round=%0d", n_ovf_shift, n_ovf_round);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
