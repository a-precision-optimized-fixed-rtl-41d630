// nmpu_branch: one of the two identical branches of an NMPU.
//
// Scales the ADC code of one current polarity and brings it into a compact
// two's complement format, in the order of the datapath:
//   multiplier    din (N,0) x scale (X,Y)           -> (N+X,Y)     unsigned
//   shift         right shift by 0..2^P-1            -> (N+X,Y)
//   overflow check + cut of the 2^P-1 MSBs and Q LSBs -> (N+X-2^P+1, Y-Q)
//                 a value that does not fit saturates to all ones
//   round/cut R   first cut/round stage (nmpu_round1) -> (.., Y-Q-R) + carry
//   overflow check a round-up carry saturates to all ones
//   2comp         to two's complement with one more integer bit; the branch
//                 of the negative current negates (NEGATE = 1)
// Defaults: (10,0) x (1,7) -> (11,7); keep (8,5); round to (8,2); result
// (9,2) signed in BR_W = 11 bits. The shift, the MSB cut of 2^P-1 bits, the
// LSB cut up to 2^-6 and the round stage follow the paper; saturation as the
// overflow action and negation for the negative branch are this design's
// choices. The block diagram of the source labels the cut result
// (N+X-P, Y-Q); this RTL follows the prose instead (2^P-1 = 3 MSBs cut, 8
// integer bits kept), the only reading that ends in an 8-bit output.
// With NEGATE = 0 the sign bit of dout is always 0 by construction.
// Purely combinational.
module nmpu_branch
  import nmpu_pkg::*;
#(
  parameter int unsigned N      = N_IN,
  parameter int unsigned X      = SC_I,
  parameter int unsigned Y      = SC_F,
  parameter int unsigned P      = SH_W,
  parameter int unsigned Q      = Q_CUT,
  parameter int unsigned R      = R_CUT,
  parameter round1_e     METHOD = RND1_R,
  parameter bit          NEGATE = 1'b0,
  // derived from the above; not meant to be overridden
  parameter int unsigned PW     = N + X + Y,               // product width
  parameter int unsigned MC     = (1 << P) - 1,            // MSBs cut
  parameter int unsigned KW     = PW - MC - Q,             // kept before rounding
  parameter int unsigned RW     = KW - R,                  // kept after rounding
  parameter int unsigned OW     = RW + 1                   // two's complement result
) (
  input  logic [N-1:0]         din,
  input  logic [X+Y-1:0]       scale,
  input  logic [P-1:0]         shift,
  output logic signed [OW-1:0] dout,
  output logic                 ovf_shift,   // first overflow check saturated
  output logic                 ovf_round    // second overflow check saturated
);

  logic [PW-1:0] prod;
  logic [PW-1:0] shifted;
  logic [KW-1:0] kept;
  logic [RW:0]   rounded;
  logic [RW-1:0] mag;

  assign prod    = PW'(din) * PW'(scale);
  assign shifted = prod >> shift;

  // first overflow check and MSB/LSB cut
  assign ovf_shift = |shifted[PW-1 -: MC];
  assign kept      = ovf_shift ? '1 : shifted[PW-MC-1:Q];

  nmpu_round1 #(.W(KW), .R(R), .METHOD(METHOD)) u_round1 (
    .din  (kept),
    .dout (rounded)
  );

  // second overflow check
  assign ovf_round = rounded[RW];
  assign mag       = ovf_round ? '1 : rounded[RW-1:0];

  // 2comp
  assign dout = NEGATE ? -$signed({1'b0, mag}) : $signed({1'b0, mag});

endmodule
