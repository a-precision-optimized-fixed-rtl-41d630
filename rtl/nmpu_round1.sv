// nmpu_round1: first cut/round stage of an NMPU branch.
//
// Removes the R lowest bits of an unsigned fixed-point value and decides,
// from the bits around the cut, whether to add one unit of the new LSB.
// The five methods compared for this stage are selectable by METHOD:
//   RND1_R    x.xx|Rxx  add one if the highest removed bit is set
//   RND1_GRR  x.xG|RRx  if the kept LSB G is set, cut; otherwise add one if
//                       either of the two highest removed bits is set
//   RND1_GR   x.xG|Rxx  if G is set, cut; otherwise round on the highest removed bit
//   RND1_GRRR x.xG|RRR  if G is set, cut; otherwise add one if any of the three
//                       highest removed bits is set
//   RND1_CUT  x.xx|xxx  plain cut
// With the default formats the input is (8,5), R = 3 removes 2^-3..2^-5 and
// G is the 2^-2 bit. The default method is RND1_R, the one of the selected
// architecture. The result is one bit wider than the kept part so that the
// carry of a round-up is visible; the following overflow check handles it.
// Purely combinational.
module nmpu_round1
  import nmpu_pkg::*;
#(
  parameter int unsigned W      = 13,       // input width
  parameter int unsigned R      = R_CUT,    // removed LSBs, at least 3
  parameter round1_e     METHOD = RND1_R
) (
  input  logic [W-1:0]   din,
  output logic [W-R:0]   dout     // {carry, kept bits} after the decision
);

  logic [W-R-1:0] kept;
  logic           g;
  logic           inc;

  assign kept = din[W-1:R];
  assign g    = din[R];

  always_comb begin
    unique case (METHOD)
      RND1_R:    inc = din[R-1];
      RND1_GRR:  inc = !g && (din[R-1] || din[R-2]);
      RND1_GR:   inc = !g && din[R-1];
      RND1_GRRR: inc = !g && (din[R-1] || din[R-2] || din[R-3]);
      default:   inc = 1'b0;
    endcase
  end

  assign dout = {1'b0, kept} + (W-R+1)'(inc);

endmodule
