// tb_nmpu_qerr: precision study of the 15 datapath variants (five first-stage
// methods x three second-stage methods) on 10,000 random operands.
//
// Each variant is built from nmpu_branch and nmpu_post. For every operand set
// each variant's output is checked bit-exactly against the integer reference,
// and its quantisation error |out - ideal| is measured against an ideal
// real-valued result, clip(p*sp/2^shp - n*sn/2^shn + offset) to [-128, 127]
// (no ReLU, so negative values are measured too). The share of outputs with
// an error of 0.5 or more is printed per variant as a 3 x 5 table. A second
// table compares with the ideal result truncated toward zero to an integer,
// since how the reference output is made integer changes which method looks
// best.
// Operands: ADC codes uniform over 0..1023, scales uniform over 0.88..1.17
// (the measured range of the correction factors), shift 3, offsets uniform
// over the (7,1) range. The table is reported, not checked: it depends on
// this operand distribution and on the choice of ideal result.
module tb_nmpu_qerr;
  import nmpu_pkg::*;
  import nmpu_ref_pkg::*;

  localparam int NPTS = 10000;

  logic [9:0]        dp, dn;
  logic [7:0]        sp, sn;
  logic [1:0]        shp, shn;
  logic signed [7:0] off;
  logic signed [7:0] y [5][3];
  int checks = 0, failures = 0;
  int nbig [5][3];
  int ntrunc [5][3];   // same, against the ideal result truncated toward zero

  for (genvar i = 0; i < 5; i++) begin : g_m1
    localparam round1_e M1 = round1_e'(i + 1);
    logic signed [10:0] bp, bn;
    nmpu_branch #(.METHOD(M1), .NEGATE(1'b0)) u_p (.din(dp), .scale(sp), .shift(shp), .dout(bp), .ovf_shift(), .ovf_round());
    nmpu_branch #(.METHOD(M1), .NEGATE(1'b1)) u_n (.din(dn), .scale(sn), .shift(shn), .dout(bn), .ovf_shift(), .ovf_round());
    for (genvar j = 0; j < 3; j++) begin : g_m2
      localparam round2_e M2 = round2_e'(j + 1);
      nmpu_post #(.METHOD(M2)) u_post (.br_p(bp), .br_n(bn), .offset(off), .relu_en(1'b0),
                                       .dout(y[i][j]), .sat_sum(), .sat_round(), .relu_zero());
    end
  end

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("share of outputs that differ from the ideal result truncated toward zero, in %%");
    $display("second stage | first stage 1      2      3      4      5");
    for (int j = 0; j < 3; j++)
      $display("  %-10s |        %6.2f %6.2f %6.2f %6.2f %6.2f", j == 0 ? "I" : (j == 1 ? "II" : "III"),
               100.0 * ntrunc[0][j] / NPTS, 100.0 * ntrunc[1][j] / NPTS, 100.0 * ntrunc[2][j] / NPTS,
               100.0 * ntrunc[3][j] / NPTS, 100.0 * ntrunc[4][j] / NPTS);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real ideal, err;
    ref_t r;
    for (int i = 0; i < 5; i++) for (int j = 0; j < 3; j++) begin nbig[i][j] = 0; ntrunc[i][j] = 0; end
    for (int k = 0; k < NPTS; k++) begin
      dp  = 10'($urandom_range(0, 1023));
      dn  = 10'($urandom_range(0, 1023));
      sp  = 8'($urandom_range(113, 150));   // 0.88 .. 1.17 in units of 2^-7
      sn  = 8'($urandom_range(113, 150));
      shp = 2'd3;
      shn = 2'd3;
      off = 8'($urandom_range(0, 255));
      #1;
      ideal = real'(dp) * real'(sp) / 128.0 / 8.0 - real'(dn) * real'(sn) / 128.0 / 8.0 + real'(off) / 2.0;
      if (ideal > 127.0)  ideal = 127.0;
      if (ideal < -128.0) ideal = -128.0;
      for (int i = 0; i < 5; i++)
        for (int j = 0; j < 3; j++) begin
          r = ref_nmpu(dp, dn, sp, shp, sn, shn, off, 1'b0, i + 1, j + 1);
          checks++;
          if (int'(y[i][j]) != r.out) begin
            failures++;
            if (failures < 10) $display("FAIL variant %0d/%0d got %0d exp %0d", i + 1, j + 1, y[i][j], r.out);
          end
          err = real'(y[i][j]) - ideal;
          if (err < 0.0) err = -err;
          if (err >= 0.5) nbig[i][j]++;
          if (int'(y[i][j]) != $rtoi(ideal)) ntrunc[i][j]++;
        end
    end
    $display("share of outputs with |error| >= 0.5, in %%, of %0d operand sets", NPTS);
    $display("second stage | first stage 1      2      3      4      5");
    for (int j = 0; j < 3; j++)
      $display("  %-10s |        %6.2f %6.2f %6.2f %6.2f %6.2f", j == 0 ? "I" : (j == 1 ? "II" : "III"),
               100.0 * nbig[0][j] / NPTS, 100.0 * nbig[1][j] / NPTS, 100.0 * nbig[2][j] / NPTS,
               100.0 * nbig[3][j] / NPTS, 100.0 * nbig[4][j] / NPTS);
    $display("share of outputs that differ from the ideal result truncated toward zero, in %%");
    $display("second stage | first stage 1      2      3      4      5");
    for (int j = 0; j < 3; j++)
      $display("  %-10s |        %6.2f %6.2f %6.2f %6.2f %6.2f", j == 0 ? "I" : (j == 1 ? "II" : "III"),
               100.0 * ntrunc[0][j] / NPTS, 100.0 * ntrunc[1][j] / NPTS, 100.0 * ntrunc[2][j] / NPTS,
               100.0 * ntrunc[3][j] / NPTS, 100.0 * ntrunc[4][j] / NPTS);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
