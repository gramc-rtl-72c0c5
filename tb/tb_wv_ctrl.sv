// tb_wv_ctrl: self-checking test of the write-verify sequencer with its comparison unit,
// driving an amc_macro model (16 x 16 array). A global-buffer model here holds random ideal
// levels. After each run every cell is read back: the number of cells within the error
// range must equal the sequencer's ok count, every cell must be within range when nothing
// failed, and ok + fail must equal the region size. One run uses a pulse limit of 2 to make
// the give-up rule happen; the SET and RESET counters must both move.
module tb_wv_ctrl;
  import gramc_pkg::*;
  localparam int N = 16;
  logic clk = 0, rst_n = 0, start = 0;
  logic [7:0] rows, cols, max_pulses;
  logic [15:0] base;
  logic [3:0] tol;
  logic busy, done;
  logic [15:0] gb_addr;
  logic [7:0] gb_data;
  logic [3:0] w_row, w_col, t_row, t_col, cell_row, cell_col;
  logic w_read_en, t_read_en, read_en, read_valid, pulse_en, pulse_done;
  logic [3:0] read_level;
  pulse_t pulse;
  logic [15:0] n_ok, n_fail;
  logic [31:0] n_set, n_reset;
  logic flag_gt, flag_eq, flag_lt;
  logic [7:0] gmem [4096];
  int checks = 0, failures = 0;
  logic signed [7:0] comp_in [N];
  logic signed [11:0] comp_out [N];
  logic comp_busy, comp_done;
  macro_cfg_t cfg_out;

  wv_ctrl #(.N(N)) dut (.clk, .rst_n, .start, .rows, .cols, .base, .max_pulses, .tol, .busy, .done,
    .gb_addr, .gb_data, .cell_row(w_row), .cell_col(w_col), .read_en(w_read_en), .read_valid,
    .read_level, .pulse_en, .pulse, .pulse_done, .n_ok, .n_fail, .n_set, .n_reset,
    .flag_gt, .flag_eq, .flag_lt);

  assign cell_row = busy ? w_row : t_row;
  assign cell_col = busy ? w_col : t_col;
  assign read_en  = busy ? w_read_en : t_read_en;

  amc_macro #(.N(N), .SEED(7)) u_mac (.clk, .rst_n, .cfg_we(1'b0), .cfg_in('0), .cfg_out,
    .cell_row, .cell_col, .pulse_en, .pulse, .pulse_done, .read_en, .read_valid, .read_level,
    .comp_start(1'b0), .comp_in, .comp_busy, .comp_done, .comp_out);

  always #5 clk = ~clk;
  always_ff @(posedge clk) gb_data <= gmem[gb_addr[11:0]];

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int r, int c, int b, int mp, int tl);
    int inr, lvl, d;
    for (int i = 0; i < r * c; i++) gmem[b + i] = 8'($urandom % 16);
    @(negedge clk);
    rows = 8'(r); cols = 8'(c); base = 16'(b); max_pulses = 8'(mp); tol = 4'(tl); start = 1;
    @(negedge clk) start = 0;
    while (!done) @(negedge clk);
    inr = 0;
    for (int i = 0; i < r; i++)
      for (int j = 0; j < c; j++) begin
        t_row = 4'(i); t_col = 4'(j); t_read_en = 1;
        @(negedge clk) t_read_en = 0;
        lvl = int'(read_level);
        d = lvl - int'(gmem[b + i * c + j]);
        if (d < 0) d = -d;
        checks++;
        if (d <= tl) inr++;
        else if (n_fail == 0) begin failures++; $display("cell (%0d,%0d) %0d vs %0d", i, j, lvl, gmem[b+i*c+j]); end
      end
    checks += 3;
    if (int'(n_ok) + int'(n_fail) != r * c) failures++;
    if (inr != int'(n_ok)) begin failures++; $display("in range %0d, ok %0d", inr, n_ok); end
    if (n_set == 0) failures++;
    $display("run %0dx%0d max=%0d: ok=%0d fail=%0d set=%0d reset=%0d", r, c, mp, n_ok, n_fail, n_set, n_reset);
  endtask

  initial begin
    int resets;
    t_row = 0; t_col = 0; t_read_en = 0;
    rows = 0; cols = 0; base = 0; max_pulses = 0; tol = 0;
    for (int i = 0; i < 4096; i++) gmem[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(16, 16, 0, 64, 0);
    resets = int'(n_reset);
    checks++;
    if (n_fail != 0) begin failures++; $display("unexpected failures at 64 pulses"); end
    run(5, 9, 300, 64, 1);
    resets += int'(n_reset);
    run(16, 16, 1000, 2, 0);       // pulse limit reached for most cells
    checks += 2;
    if (n_fail == 0) failures++;
    if (resets == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
