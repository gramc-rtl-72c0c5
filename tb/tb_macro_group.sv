// tb_macro_group: self-checking test of macro selection in the macro group (4 macros of
// 8 x 8). Pulses, configuration writes and computations must reach only the selected macro,
// and results and status must come from it.
module tb_macro_group;
  import gramc_pkg::*;
  localparam int N = 8, NM = 4;
  logic clk = 0, rst_n = 0;
  logic [3:0] sel = 0;
  logic cfg_we = 0;
  macro_cfg_t cfg_in, cfg_out;
  logic [2:0] cell_row = 0, cell_col = 0;
  logic pulse_en = 0, pulse_done, read_en = 0, read_valid;
  pulse_t pulse;
  logic [3:0] read_level;
  logic comp_start = 0, comp_busy, comp_done;
  logic signed [7:0]  comp_in  [N];
  logic signed [11:0] comp_out [N];
  int checks = 0, failures = 0;
  int lv [NM];

  macro_group #(.N_MAC(NM), .N(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic rd(int m, output int l);
    @(negedge clk) sel = 4'(m); read_en = 1;
    @(negedge clk) read_en = 0;
    checks++;
    if (!read_valid) failures++;
    l = int'(read_level);
  endtask

  initial begin
    int l;
    cfg_in = '0; pulse = '0;
    for (int i = 0; i < N; i++) comp_in[i] = 8'sd127;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // Drive macro k's cell (0,0) up with k*6 strong SET pulses; others must keep level 0.
    for (int k = 0; k < NM; k++) begin
      for (int p = 0; p < k * 6; p++) begin
        @(negedge clk) sel = 4'(k); pulse.set = 1; pulse.step = 8'd10; pulse_en = 1;
        @(negedge clk) pulse_en = 0;
        while (!pulse_done) @(negedge clk);
      end
    end
    for (int k = 0; k < NM; k++) begin
      rd(k, lv[k]);
      checks++;
      if ((k == 0) ? (lv[k] != 0) : (lv[k] <= lv[k > 0 ? k - 1 : 0])) begin
        failures++; $display("macro %0d level %0d", k, lv[k]);
      end
    end
    // Configure each macro differently and read the configuration back.
    for (int k = 0; k < NM; k++) begin
      @(negedge clk) sel = 4'(k); cfg_in.mode = MODE_MVM; cfg_in.rows = 8'(1 + k); cfg_in.cols = 8'(N);
      cfg_we = 1;
      @(negedge clk) cfg_we = 0;
    end
    for (int k = 0; k < NM; k++) begin
      @(negedge clk) sel = 4'(k);
      #1 checks++;
      if (int'(cfg_out.rows) != 1 + k) failures++;
    end
    // MVM of row 0 with input 127 on each macro: output row 0 follows that macro's level.
    for (int k = 0; k < NM; k++) begin
      real gmin, gmax;
      @(negedge clk) sel = 4'(k); comp_start = 1;
      @(negedge clk) comp_start = 0;
      while (!comp_done) @(negedge clk);
      gmin = 1.0 + 6.6 * (real'(lv[k]) - 0.5); gmax = 1.0 + 6.6 * (real'(lv[k]) + 0.5);
      checks++;
      // Other cells of row 0 are in their initial state, 1 to 6 uS.
      if (real'(comp_out[0]) < (gmin + 7.0) * 127.0 / 1024.0 - 1.0 ||
          real'(comp_out[0]) > (gmax + 42.0) * 127.0 / 1024.0 + 1.0) begin
        failures++; $display("macro %0d mvm %0d level %0d", k, comp_out[0], lv[k]);
      end
      for (int i = 1; i < N; i++) begin
        checks++;
        if ((i < k + 1) ? (comp_out[i] <= 0) : (comp_out[i] != 0)) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
