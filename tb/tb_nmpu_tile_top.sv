// tb_nmpu_tile_top: end-to-end test of the tile periphery at its default size
// (64 NMPUs, 256 ADC columns). Each operation writes a configuration word for
// every ADC column through the address decoder, applies random ADC codes,
// pulses start and checks that done comes exactly 4 cycles later (one cycle
// per multiplexed column) and that all 256 outputs match the reference.
// The ADC-to-NMPU placement is checked inside the array for the NMPUs at
// both ends. A start pulse during an operation must be ignored. Every
// mechanism of the datapath (both overflow checks, sum saturation, ReLU on
// and off) is counted and must occur.
module tb_nmpu_tile_top;
  import nmpu_pkg::*;
  import nmpu_ref_pkg::*;

  localparam int NA = 256;

  logic clk = 0, rst_n = 0, start = 0, relu_en = 0, cfg_wr_en = 0;
  logic [7:0] cfg_addr = 0;
  col_cfg_t cfg_wr_data;
  logic [9:0] adc_p [NA], adc_n [NA];
  logic busy, done;
  logic signed [7:0] dout [NA];
  logic [4:0] events;
  col_cfg_t cfg [NA];
  int checks = 0, failures = 0;
  int n_ovf_shift = 0, n_ovf_round = 0, n_sat_sum = 0, n_relu_zero = 0, n_relu_off_neg = 0,
      n_start_ignored = 0, n_ops = 0;

  nmpu_tile_top dut (.clk, .rst_n, .start, .relu_en, .cfg_wr_en, .cfg_addr, .cfg_wr_data,
                     .adc_p, .adc_n, .busy, .done, .dout, .events);

  always #5 clk = ~clk;

  task automatic chk(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s got %0d exp %0d", what, got, exp);
    end
  endtask

  initial begin
    #50000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_op(bit extra_start);
    int cyc;
    ref_t r;
    // configuration of every column
    for (int a = 0; a < NA; a++) begin
      @(negedge clk);
      cfg[a].scale_p = 8'($urandom_range(100, 160));
      cfg[a].scale_n = 8'($urandom_range(100, 160));
      cfg[a].shift_p = 2'($urandom_range(0, 3));
      cfg[a].shift_n = 2'($urandom_range(0, 3));
      cfg[a].offset  = 8'($urandom_range(0, 255));
      cfg_wr_en = 1; cfg_addr = 8'(a); cfg_wr_data = cfg[a];
    end
    @(negedge clk);
    cfg_wr_en = 0;
    relu_en = 1'($urandom_range(0, 1));
    for (int a = 0; a < NA; a++) begin
      adc_p[a] = 10'($urandom_range(0, 1023));
      adc_n[a] = 10'($urandom_range(0, 1023) >> $urandom_range(0, 3));
    end
    // start, then count cycles to done
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done) begin
      if (extra_start && cyc == 2) begin
        start = 1;              // must be ignored: the array is busy
        n_start_ignored++;
      end else start = 0;
      @(negedge clk);
      cyc++;
      if (cyc > 20) break;
    end
    start = 0;
    chk(cyc, COLS, "cycles from start to done");
    n_ops++;
    for (int a = 0; a < NA; a++) begin
      r = ref_nmpu(adc_p[a], adc_n[a], cfg[a].scale_p, cfg[a].shift_p, cfg[a].scale_n, cfg[a].shift_n,
                   cfg[a].offset, relu_en, 1, 1);
      chk(int'(dout[a]), r.out, $sformatf("dout[%0d]", a));
      if (r.ovf_shift) n_ovf_shift++;
      if (r.ovf_round) n_ovf_round++;
      if (r.sat_sum)   n_sat_sum++;
      if (r.relu_zero) n_relu_zero++;
      if (!relu_en && r.out < 0) n_relu_off_neg++;
    end
    // placement: NMPU 0 serves ADCs 0,2,4,6; NMPU 1 serves 1,3,5,7; NMPU 63 serves 249..255
    chk(int'(dut.g_nmpu[0].u_nmpu.dout[1]),  int'(dout[2]),   "NMPU 0 slot 1 = ADC 2");
    chk(int'(dut.g_nmpu[0].u_nmpu.dout[3]),  int'(dout[6]),   "NMPU 0 slot 3 = ADC 6");
    chk(int'(dut.g_nmpu[1].u_nmpu.dout[3]),  int'(dout[7]),   "NMPU 1 slot 3 = ADC 7");
    chk(int'(dut.g_nmpu[62].u_nmpu.dout[3]), int'(dout[254]), "NMPU 62 slot 3 = ADC 254");
    chk(int'(dut.g_nmpu[63].u_nmpu.dout[3]), int'(dout[255]), "NMPU 63 slot 3 = ADC 255");
    // a second start right after done may not be needed; idle for a cycle
    @(negedge clk);
    chk(int'(busy), 0, "idle after done");
  endtask

  initial begin
    cfg_wr_data = '0;
    for (int a = 0; a < NA; a++) begin adc_p[a] = 0; adc_n[a] = 0; end
    #12 rst_n = 1;
    @(negedge clk);
    chk(int'(busy), 0, "idle after reset");
    for (int op = 0; op < 12; op++) run_op(op % 3 == 1);
    $display("ops=%0d ovf_shift=%0d ovf_round=%0d sat_sum=%0d relu_zero=%0d relu_off_negative=%0d start_ignored=%0d",
             n_ops, n_ovf_shift, n_ovf_round, n_sat_sum, n_relu_zero, n_relu_off_neg, n_start_ignored);
    checks++;
    if (n_ovf_shift == 0 || n_ovf_round == 0 || n_sat_sum == 0 || n_relu_zero == 0 ||
        n_relu_off_neg == 0 || n_start_ignored == 0) begin
      failures++;
      $display("FAIL a mechanism never occurred");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
