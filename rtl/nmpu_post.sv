// nmpu_post: sum and output stage of an NMPU.
//
// Adds the results of the two branches (the negative-current branch arrives
// already negated) and the column offset, then
//   sum         full-width addition, saturated to (OUT_W, BF) two's complement
//               (default (8,2)): one integer bit fewer than the branch results
//   round/cut S second cut/round stage removes the S = BF fractional bits
//               (default 2) so that the output is an integer; METHOD selects
//               I (cut for all values), II (round positive, cut negative) or
//               III (round all). Rounding adds half an output LSB; a carry past
//               the largest output value saturates.
//   ReLU        negative results become zero when relu_en is high
// The offset (7,1) is aligned to the BF fractional bits of the branches.
// Saturation and the relu_en bypass are this design's choices; the order of
// the steps and the method I default follow the selected architecture.
// With method I nothing is rounded up, so sat_round stays 0; the port is kept
// because methods II and III can set it. Purely combinational.
module nmpu_post
  import nmpu_pkg::*;
#(
  parameter int unsigned BW     = BR_W,    // branch result width
  parameter int unsigned BF     = S_CUT,   // branch fractional bits, all removed by stage S
  parameter int unsigned OW     = OFF_W,   // offset width
  parameter int unsigned OF     = OFF_F,   // offset fractional bits, <= BF
  parameter int unsigned DW     = OUT_W,   // output width
  parameter round2_e     METHOD = RND2_CUT
) (
  input  logic signed [BW-1:0] br_p,
  input  logic signed [BW-1:0] br_n,
  input  logic signed [OW-1:0] offset,
  input  logic                 relu_en,
  output logic signed [DW-1:0] dout,
  output logic                 sat_sum,    // sum exceeded the (DW,BF) range
  output logic                 sat_round,  // rounding carried past the max output
  output logic                 relu_zero   // ReLU replaced a negative value
);

  localparam int unsigned SW = (BW > OW + BF - OF ? BW : OW + BF - OF) + 2;  // exact sum
  localparam int unsigned TW = DW + BF;                                       // saturated sum

  logic signed [SW-1:0] off_al;
  logic signed [SW-1:0] sum;
  logic signed [TW-1:0] sum_sat;
  logic signed [TW-1:0] sum_max;
  logic signed [TW-1:0] sum_min;
  logic                 round_up;
  logic signed [DW:0]   rnd;
  logic signed [DW-1:0] clipped;

  assign sum_max = {1'b0, {(TW-1){1'b1}}};
  assign sum_min = {1'b1, {(TW-1){1'b0}}};

  assign off_al = SW'(offset) <<< (BF - OF);
  assign sum    = SW'(br_p) + SW'(br_n) + off_al;

  always_comb begin
    sat_sum = 1'b1;
    if (sum > SW'(sum_max))      sum_sat = sum_max;
    else if (sum < SW'(sum_min)) sum_sat = sum_min;
    else begin
      sum_sat = sum[TW-1:0];
      sat_sum = 1'b0;
    end
  end

  // second cut/round stage
  always_comb begin
    unique case (METHOD)
      RND2_POS:  round_up = !sum_sat[TW-1] && sum_sat[BF-1];
      RND2_BOTH: round_up = sum_sat[BF-1];
      default:   round_up = 1'b0;
    endcase
  end

  assign rnd       = (DW+1)'(sum_sat >>> BF) + (DW+1)'(round_up);
  assign sat_round = (rnd[DW] != rnd[DW-1]);
  assign clipped   = sat_round ? {1'b0, {(DW-1){1'b1}}} : rnd[DW-1:0];

  // ReLU
  assign relu_zero = relu_en && clipped[DW-1];
  assign dout      = relu_zero ? '0 : clipped;

endmodule
