// tb_nmpu_cfg_regs: checks the reset values, that a write reaches only its
// column, that it is readable from the next cycle, and that words hold while
// wr_en is low. A shadow array kept by the testbench is the reference.
module tb_nmpu_cfg_regs;
  import nmpu_pkg::*;

  logic     clk = 0, rst_n = 0, wr_en = 0;
  logic [1:0] wr_col = 0, rd_sel = 0;
  col_cfg_t wr_data, rd_data;
  col_cfg_t shadow [4];
  int checks = 0, failures = 0;

  nmpu_cfg_regs #(.NCOL(4)) dut (.clk, .rst_n, .wr_en, .wr_col, .wr_data, .rd_sel, .rd_data);

  always #5 clk = ~clk;

  task automatic chk_all(string what);
    for (int c = 0; c < 4; c++) begin
      rd_sel = 2'(c);
      #1;
      checks++;
      if (rd_data !== shadow[c]) begin
        failures++;
        if (failures < 10) $display("FAIL %s col %0d got %h exp %h", what, c, rd_data, shadow[c]);
      end
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_data = '0;
    for (int c = 0; c < 4; c++) shadow[c] = '{scale_p: 8'h80, shift_p: 2'd0, scale_n: 8'h80, shift_n: 2'd0, offset: 8'sd0};
    #12 rst_n = 1;
    chk_all("reset");
    for (int i = 0; i < 200; i++) begin
      @(negedge clk);
      wr_en   = 1'($urandom_range(0, 1));
      wr_col  = 2'($urandom_range(0, 3));
      wr_data = col_cfg_t'({$urandom, $urandom});
      @(posedge clk);
      #1;
      if (wr_en) shadow[wr_col] = wr_data;
      wr_en = 0;
      chk_all("after write");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
