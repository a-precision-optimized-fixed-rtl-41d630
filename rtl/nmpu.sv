// nmpu: one fixed-point near-memory processing unit.
//
// Computes, for one ADC column at a time,
//   out = ReLU( sat(pos x scale_p >> shift_p) - sat(neg x scale_n >> shift_n) + offset )
// with the cut and round steps of nmpu_branch and nmpu_post. The unit is
// shared by COLS = 4 ADC columns: two 4:1 multiplexers select the positive-
// and negative-current codes of column col_sel, the configuration word of
// that column is read from nmpu_cfg_regs, and the datapath between the
// multiplexers and the output registers is combinational.
//
// Timing: with in_valid high, the result for column col_sel is written into
// that column's output register on the next rising edge (one cycle per
// column, so all COLS columns take COLS cycles). res_valid/res_col then show
// which register was written in the previous cycle. Output registers reset to
// zero. The datapath order and formats follow the paper; the per-column
// output registers, the handshake and the reset are this design's choices.
module nmpu
  import nmpu_pkg::*;
#(
  parameter int unsigned NCOL    = COLS,
  parameter round1_e     METHOD1 = RND1_R,     // first cut/round stage
  parameter round2_e     METHOD2 = RND2_CUT,   // second cut/round stage
  parameter int unsigned AW      = (NCOL > 1) ? $clog2(NCOL) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // ADC codes of the served columns
  input  logic [N_IN-1:0]         din_p [NCOL],
  input  logic [N_IN-1:0]         din_n [NCOL],
  // processing control
  input  logic                    in_valid,
  input  logic [AW-1:0]           col_sel,
  input  logic                    relu_en,
  // configuration write
  input  logic                    cfg_wr_en,
  input  logic [AW-1:0]           cfg_wr_col,
  input  col_cfg_t                cfg_wr_data,
  // results
  output logic signed [OUT_W-1:0] dout [NCOL],
  output logic                    res_valid,
  output logic [AW-1:0]           res_col,
  // events of the last processed column, for monitoring
  output logic [4:0]              events      // {relu, round sat, sum sat, round ovf, shift ovf}
);

  col_cfg_t                cfg;
  logic [N_IN-1:0]         mux_p, mux_n;
  logic signed [BR_W-1:0]  br_p, br_n;
  logic                    ovf_sh_p, ovf_sh_n, ovf_rd_p, ovf_rd_n;
  logic signed [OUT_W-1:0] y;
  logic                    sat_sum, sat_round, relu_zero;

  nmpu_cfg_regs #(.NCOL(NCOL), .AW(AW)) u_cfg (
    .clk, .rst_n,
    .wr_en   (cfg_wr_en),
    .wr_col  (cfg_wr_col),
    .wr_data (cfg_wr_data),
    .rd_sel  (col_sel),
    .rd_data (cfg)
  );

  // Mux 4:1 of each polarity
  assign mux_p = din_p[col_sel];
  assign mux_n = din_n[col_sel];

  nmpu_branch #(.METHOD(METHOD1), .NEGATE(1'b0)) u_branch_p (
    .din (mux_p), .scale (cfg.scale_p), .shift (cfg.shift_p),
    .dout (br_p), .ovf_shift (ovf_sh_p), .ovf_round (ovf_rd_p)
  );

  nmpu_branch #(.METHOD(METHOD1), .NEGATE(1'b1)) u_branch_n (
    .din (mux_n), .scale (cfg.scale_n), .shift (cfg.shift_n),
    .dout (br_n), .ovf_shift (ovf_sh_n), .ovf_round (ovf_rd_n)
  );

  nmpu_post #(.METHOD(METHOD2)) u_post (
    .br_p, .br_n,
    .offset    (cfg.offset),
    .relu_en,
    .dout      (y),
    .sat_sum, .sat_round, .relu_zero
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NCOL; i++) dout[i] <= '0;
      res_valid <= 1'b0;
      res_col   <= '0;
      events    <= '0;
    end else begin
      res_valid <= in_valid;
      if (in_valid) begin
        dout[col_sel] <= y;
        res_col       <= col_sel;
        events        <= {relu_zero, sat_round, sat_sum,
                          ovf_rd_p | ovf_rd_n, ovf_sh_p | ovf_sh_n};
      end
    end
  end

endmodule
