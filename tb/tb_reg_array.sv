// tb_reg_array: self-checking test of a macro's configuration register array.
// Writes random modes and regions and checks the stored value and every switch control.
module tb_reg_array;
  import gramc_pkg::*;
  logic clk = 0, rst_n = 0, we = 0;
  macro_cfg_t cfg_in, cfg;
  logic [127:0] row_en, col_en;
  logic tg_tia, tg_fb_array, tg_second_stage, tg_input;
  int checks = 0, failures = 0;

  reg_array dut (.clk, .rst_n, .we, .cfg_in, .cfg, .row_en, .col_en,
                 .tg_tia, .tg_fb_array, .tg_second_stage, .tg_input);

  always #5 clk = ~clk;

  task automatic check(mode_e m, int r, int c);
    logic [127:0] er, ec;
    for (int i = 0; i < 128; i++) begin er[i] = i < r; ec[i] = i < c; end
    checks++;
    if (cfg.mode != m || int'(cfg.rows) != r || int'(cfg.cols) != c || row_en != er || col_en != ec ||
        tg_tia != (m == MODE_MVM) || tg_fb_array != (m != MODE_MVM) ||
        tg_second_stage != (m == MODE_PINV || m == MODE_EGV) || tg_input != (m != MODE_EGV)) begin
      failures++;
      $display("mismatch mode=%0d rows=%0d cols=%0d", m, r, c);
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg_in = '0;
    @(posedge clk); #1 check(MODE_MVM, 128, 128);   // reset value
    @(negedge clk) rst_n = 1;
    for (int i = 0; i < 300; i++) begin
      mode_e m; int r, c;
      m = mode_e'($urandom % 4); r = 1 + $urandom % 128; c = 1 + $urandom % 128;
      @(negedge clk);
      we = 1; cfg_in.mode = m; cfg_in.rows = 8'(r); cfg_in.cols = 8'(c);
      @(negedge clk);
      we = 0; cfg_in.rows = 8'd5;
      check(m, r, c);
      @(negedge clk);
      check(m, r, c);              // holds without we
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
