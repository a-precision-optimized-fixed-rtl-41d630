// nmpu_pkg: formats, sizes and shared types of the fixed-point near-memory
// processing unit (NMPU) that post-processes the ADC outputs of an analog
// in-memory computing tile.
//
// A fixed-point format is written (I,F): I integer bits, F fractional bits.
// The defaults follow the configuration evaluated as the main one:
//   ADC input      (10,0) unsigned
//   scale          (1,7)  unsigned, one per polarity and column
//   shift          2-bit right-shift amount (0..3), one per polarity and column
//   offset         (7,1)  two's complement, one per column
//   output         (8,0)  two's complement
// Intermediate cuts: 2^SHIFT_W-1 = 3 MSBs and Q = 2 LSBs after the shift,
// R = 3 LSBs in the first cut/round stage, S = 2 LSBs in the second.
// S = 2 is derived (it is the number of fractional bits left before the
// integer output); the rest are stated sizes.
package nmpu_pkg;

  // ---- sizes of the datapath ----------------------------------------------
  localparam int unsigned N_IN    = 10;  // ADC code width
  localparam int unsigned SC_I    = 1;   // scale integer bits (X)
  localparam int unsigned SC_F    = 7;   // scale fractional bits (Y)
  localparam int unsigned SH_W    = 2;   // shift field width (P)
  localparam int unsigned Q_CUT   = 2;   // LSBs cut after the shift (2^-7, 2^-6)
  localparam int unsigned R_CUT   = 3;   // LSBs removed by the first cut/round stage
  localparam int unsigned S_CUT   = 2;   // LSBs removed by the second cut/round stage
  localparam int unsigned OFF_I   = 7;   // offset integer bits, sign included
  localparam int unsigned OFF_F   = 1;   // offset fractional bits
  localparam int unsigned OUT_W   = 8;   // output width, two's complement

  // ---- tile organisation ----------------------------------------------------
  localparam int unsigned COLS    = 4;   // ADC columns time-multiplexed on one NMPU
  localparam int unsigned N_NMPU  = 64;  // NMPUs in a 256-column tile

  // ---- derived widths -------------------------------------------------------
  localparam int unsigned SC_W    = SC_I + SC_F;                        // 8
  localparam int unsigned MSB_CUT = (1 << SH_W) - 1;                    // 3
  // branch result: two's complement, (N_IN+SC_I-MSB_CUT+1, SC_F-Q_CUT-R_CUT)
  localparam int unsigned BR_W    = N_IN + SC_I - MSB_CUT + 1 + SC_F - Q_CUT - R_CUT; // 11
  localparam int unsigned BR_F    = SC_F - Q_CUT - R_CUT;              // 2
  localparam int unsigned OFF_W   = OFF_I + OFF_F;                      // 8

  // ---- cut/round methods ------------------------------------------------------
  // First stage, named after the bit pattern of the kept LSBs | removed LSBs
  // (G: guard bit that forces a cut, R: bits that request rounding up).
  typedef enum logic [2:0] {
    RND1_R   = 3'd1,  // x.xx|Rxx : round up if bit 2^-3 is set
    RND1_GRR = 3'd2,  // x.xG|RRx : cut if G, else round up if 2^-3 or 2^-4
    RND1_GR  = 3'd3,  // x.xG|Rxx : cut if G, else round up if 2^-3
    RND1_GRRR= 3'd4,  // x.xG|RRR : cut if G, else round up if any removed bit
    RND1_CUT = 3'd5   // x.xx|xxx : cut
  } round1_e;

  // Second stage, applied to the sum.
  typedef enum logic [1:0] {
    RND2_CUT     = 2'd1,  // I   : cut for positive and negative values
    RND2_POS     = 2'd2,  // II  : round positive values, cut negative ones
    RND2_BOTH    = 2'd3   // III : round positive and negative values
  } round2_e;

  // ---- configuration of one ADC column ----------------------------------------
  typedef struct packed {
    logic [SC_W-1:0]         scale_p;  // (1,7) unsigned, positive-current branch
    logic [SH_W-1:0]         shift_p;  // right shift, positive-current branch
    logic [SC_W-1:0]         scale_n;  // (1,7) unsigned, negative-current branch
    logic [SH_W-1:0]         shift_n;  // right shift, negative-current branch
    logic signed [OFF_W-1:0] offset;   // (7,1) two's complement
  } col_cfg_t;

  localparam col_cfg_t CFG_RESET = '{
    scale_p: SC_W'(1 << SC_F), shift_p: '0,
    scale_n: SC_W'(1 << SC_F), shift_n: '0,
    offset:  '0
  };

endpackage
