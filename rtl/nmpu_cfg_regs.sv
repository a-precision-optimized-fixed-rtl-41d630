// nmpu_cfg_regs: configuration registers of one NMPU.
//
// Holds one col_cfg_t word (scale and shift of both branches, offset) for
// each of the COLS ADC columns the NMPU serves. Affine correction and batch
// normalisation are per column, so each column keeps its own word. A word is
// written on the rising clock edge when wr_en is high; the word of the column
// being processed (rd_sel) is read combinationally, so a write becomes visible
// in the cycle after it. Reset (active low, asynchronous) loads CFG_RESET:
// unit scales, no shift, zero offset. The register contents follow the
// paper; the count of one word per column, the write port and the reset
// values are this design's choices.
module nmpu_cfg_regs
  import nmpu_pkg::*;
#(
  parameter int unsigned NCOL = COLS,
  parameter int unsigned AW   = (NCOL > 1) ? $clog2(NCOL) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            wr_en,
  input  logic [AW-1:0]   wr_col,
  input  col_cfg_t        wr_data,
  input  logic [AW-1:0]   rd_sel,
  output col_cfg_t        rd_data
);

  col_cfg_t regs [NCOL];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NCOL; i++) regs[i] <= CFG_RESET;
    end else if (wr_en) begin
      regs[wr_col] <= wr_data;
    end
  end

  assign rd_data = regs[rd_sel];

  // a column index beyond NCOL would be lost
  a_col_in_range: assert property (@(posedge clk) disable iff (!rst_n) wr_en |-> 32'(wr_col) < NCOL)
    else $error("nmpu_cfg_regs: write to column %0d of %0d", wr_col, NCOL);

endmodule
