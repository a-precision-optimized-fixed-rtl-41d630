// tb_nmpu: one NMPU with its four columns. Each round writes random
// configuration words for the four columns, drives random ADC codes,
// processes the columns in a random order (one per cycle) and compares each
// column's output register with the reference. Checks the one-cycle latency
// of res_valid/res_col and that every datapath event occurs.
module tb_nmpu;
  import nmpu_pkg::*;
  import nmpu_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  logic [9:0] din_p [4], din_n [4];
  logic in_valid = 0, relu_en = 0, cfg_wr_en = 0, res_valid;
  logic [1:0] col_sel = 0, cfg_wr_col = 0, res_col;
  col_cfg_t cfg_wr_data, cfg [4];
  logic signed [7:0] dout [4];
  logic [4:0] events;
  int checks = 0, failures = 0;
  int n_ev [5];

  nmpu dut (.clk, .rst_n, .din_p, .din_n, .in_valid, .col_sel, .relu_en,
            .cfg_wr_en, .cfg_wr_col, .cfg_wr_data, .dout, .res_valid, .res_col, .events);

  always #5 clk = ~clk;

  task automatic chk(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s got %0d exp %0d", what, got, exp);
    end
  endtask

  function automatic col_cfg_t rand_cfg();
    col_cfg_t c;
    c.scale_p = 8'($urandom_range(100, 160));   // near 1.0, as for affine correction
    c.scale_n = 8'($urandom_range(100, 160));
    c.shift_p = 2'($urandom_range(0, 3));
    c.shift_n = 2'($urandom_range(0, 3));
    c.offset  = 8'($urandom_range(0, 255));
    if ($urandom_range(0, 3) == 0) c.scale_p = 8'($urandom_range(0, 255));
    return c;
  endfunction

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int order [4];
    ref_t r;
    for (int c = 0; c < 4; c++) begin din_p[c] = 0; din_n[c] = 0; end
    cfg_wr_data = '0;
    #12 rst_n = 1;
    for (int c = 0; c < 4; c++) chk(int'(dout[c]), 0, "reset");
    for (int round = 0; round < 600; round++) begin
      // configuration
      for (int c = 0; c < 4; c++) begin
        @(negedge clk);
        cfg[c] = rand_cfg();
        cfg_wr_en = 1; cfg_wr_col = 2'(c); cfg_wr_data = cfg[c];
      end
      @(negedge clk);
      cfg_wr_en = 0;
      relu_en = 1'($urandom_range(0, 1));
      for (int c = 0; c < 4; c++) begin
        din_p[c] = 10'($urandom_range(0, 1023));
        din_n[c] = 10'($urandom_range(0, 1023) >> $urandom_range(0, 4));
        order[c] = c;
      end
      order.shuffle();
      for (int i = 0; i < 4; i++) begin
        in_valid = 1; col_sel = 2'(order[i]);
        @(posedge clk); #1;
        chk(int'(res_valid), 1, "res_valid");
        chk(int'(res_col), order[i], "res_col");
        r = ref_nmpu(din_p[order[i]], din_n[order[i]], cfg[order[i]].scale_p, cfg[order[i]].shift_p,
                     cfg[order[i]].scale_n, cfg[order[i]].shift_n, cfg[order[i]].offset, relu_en, 1, 1);
        chk(int'(dout[order[i]]), r.out, "dout");
        chk(int'(events), int'({r.relu_zero, r.sat_round, r.sat_sum, r.ovf_round, r.ovf_shift}), "events");
        for (int e = 0; e < 5; e++) if (events[e]) n_ev[e]++;
      end
      in_valid = 0;
      @(posedge clk); #1;
      chk(int'(res_valid), 0, "res_valid low");
    end
    // ovf_shift, ovf_round, sat_sum and relu must occur; method I never saturates on rounding
    for (int e = 0; e < 5; e++) begin
      $display("event %0d seen %0d times", e, n_ev[e]);
      if (e != 3) begin
        checks++;
        if (n_ev[e] == 0) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
