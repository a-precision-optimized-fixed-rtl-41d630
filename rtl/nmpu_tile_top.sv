// nmpu_tile_top: digital post-processing periphery of one analog in-memory
// computing tile.
//
// A tile has N_ADC = COLS x N_NMPU ADC columns (default 4 x 64 = 256), each
// delivering a 10-bit code for the positive and one for the negative bit-line
// current. The N_NMPU fixed-point NMPUs work in parallel, each shared by COLS
// columns, so the whole tile is post-processed in COLS cycles.
//
// Column-to-NMPU mapping: ADCs sit alternately above and below the crossbar,
// and a pair of NMPUs (one per side) covers 2*COLS neighbouring ADCs. NMPU
// k = 2m + s serves ADCs 2*COLS*m + 2c + s, c = 0..COLS-1 (NMPU 0: ADCs 0, 2,
// 4, 6; NMPU 1: ADCs 1, 3, 5, 7; NMPU 63: ADCs 249 ... 255).
//
// Operation: the ADC codes are held on adc_p/adc_n. A start pulse (ignored
// while busy) processes column slot 0 of every NMPU in the same cycle, then
// slots 1..COLS-1 in the following cycles; done pulses COLS cycles after
// start, when dout[] holds all N_ADC results. busy is high from the cycle
// after start until done. relu_en must stay constant during an operation.
//
// Configuration: cfg_wr_en with cfg_addr = ADC column writes that column's
// scale, shift and offset word; the address is decoded to its NMPU and slot.
//
// events reports, ORed over all NMPUs, what happened in the previous cycle:
// {ReLU zeroed, output round saturated, sum saturated, round overflow,
// shift overflow}.
//
// The NMPU count, the 4-column sharing and the ADC placement follow the
// paper; the start/done sequencing, the configuration write port and the
// events port are this design's choices.
module nmpu_tile_top
  import nmpu_pkg::*;
#(
  parameter int unsigned N_NMPU_P = N_NMPU,
  parameter int unsigned N_ADC    = COLS * N_NMPU_P,
  parameter int unsigned ADC_AW   = $clog2(N_ADC),
  parameter int unsigned CW       = $clog2(COLS)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic                    relu_en,
  // configuration write
  input  logic                    cfg_wr_en,
  input  logic [ADC_AW-1:0]       cfg_addr,
  input  col_cfg_t                cfg_wr_data,
  // ADC outputs
  input  logic [N_IN-1:0]         adc_p [N_ADC],
  input  logic [N_IN-1:0]         adc_n [N_ADC],
  // status and results
  output logic                    busy,
  output logic                    done,
  output logic signed [OUT_W-1:0] dout [N_ADC],
  output logic [4:0]              events
);

  // ---- sequencer -------------------------------------------------------------
  logic [CW-1:0] phase;
  logic          in_valid;
  logic [CW-1:0] col_sel;

  assign in_valid = busy || start;
  assign col_sel  = busy ? phase : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      done  <= 1'b0;
      phase <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy  <= 1'b1;
          phase <= CW'(1);
        end
      end else begin
        phase <= phase + CW'(1);
        if (phase == CW'(COLS - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  // ---- configuration address decode -------------------------------------------
  // ADC a: group m = a / (2*COLS), side s = a % 2, slot c = (a % (2*COLS)) / 2
  logic [ADC_AW-1:0] cfg_nmpu;
  logic [CW-1:0]     cfg_slot;

  int unsigned cfg_a;

  assign cfg_a    = 32'(cfg_addr);
  assign cfg_nmpu = ADC_AW'((cfg_a / (2 * COLS)) * 2 + (cfg_a % 2));
  assign cfg_slot = CW'((cfg_a % (2 * COLS)) / 2);

  // ---- NMPU array ---------------------------------------------------------------
  logic [4:0] ev [N_NMPU_P];
  logic       rv [N_NMPU_P];

  for (genvar k = 0; k < N_NMPU_P; k++) begin : g_nmpu
    localparam int unsigned M = k / 2;
    localparam int unsigned S = k % 2;

    logic [N_IN-1:0]         dp [COLS];
    logic [N_IN-1:0]         dn [COLS];
    logic signed [OUT_W-1:0] dq [COLS];

    for (genvar c = 0; c < COLS; c++) begin : g_col
      assign dp[c] = adc_p[2*COLS*M + 2*c + S];
      assign dn[c] = adc_n[2*COLS*M + 2*c + S];
      assign dout[2*COLS*M + 2*c + S] = dq[c];
    end

    nmpu #(.NCOL(COLS), .AW(CW)) u_nmpu (
      .clk, .rst_n,
      .din_p       (dp),
      .din_n       (dn),
      .in_valid,
      .col_sel,
      .relu_en,
      .cfg_wr_en   (cfg_wr_en && (cfg_nmpu == ADC_AW'(k))),
      .cfg_wr_col  (cfg_slot),
      .cfg_wr_data,
      .dout        (dq),
      .res_valid   (rv[k]),
      .res_col     (),
      .events      (ev[k])
    );
  end

  always_comb begin
    events = '0;
    for (int k = 0; k < N_NMPU_P; k++) if (rv[k]) events |= ev[k];
  end

  // ---- protocol checks ----------------------------------------------------------
  a_done_not_busy: assert property (@(posedge clk) disable iff (!rst_n) !(busy && done))
    else $error("nmpu_tile_top: done while busy");
  a_no_cfg_when_busy: assert property (@(posedge clk) disable iff (!rst_n) !(cfg_wr_en && busy))
    else $error("nmpu_tile_top: configuration written during an operation");
  a_done_after_cols: assert property (@(posedge clk) disable iff (!rst_n)
                                      (start && !busy) |-> ##COLS done)
    else $error("nmpu_tile_top: done not COLS cycles after start");

endmodule
