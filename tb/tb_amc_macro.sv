// tb_amc_macro: self-checking test of the AMC macro behavioural model (8 x 8 array).
// 1. Register array: configuration write and read back.
// 2. Cell programming with a write-verify loop run by this testbench: checks the read and
//    pulse latencies and that SET never lowers and RESET never raises the read level.
// 3. Computations on the programmed matrix, against references computed here from the
//    level-centre conductances 1 + L * 99/15 uS: MVM within the bound set by the half-level
//    programming error, INV and PINV within 15 % of a Gauss-Jordan solution, EGV through the
//    eigen-residual and the norm of the output vector.
module tb_amc_macro;
  import gramc_pkg::*;
  localparam int N = 8;
  localparam real LST = 99.0 / 15.0;
  logic clk = 0, rst_n = 0;
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
  int tgt [N][N];

  amc_macro #(.N(N), .PULSE_CYCLES(3), .SETTLE_CYCLES(4)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real fabs(real v);
    return (v < 0.0) ? -v : v;
  endfunction

  function automatic real gc(int l);
    return 1.0 + LST * real'(l);
  endfunction

  task automatic configure(mode_e m, int r, int c);
    @(negedge clk);
    cfg_we = 1; cfg_in.mode = m; cfg_in.rows = 8'(r); cfg_in.cols = 8'(c);
    @(negedge clk) cfg_we = 0;
    checks++;
    if (cfg_out.mode != m || int'(cfg_out.rows) != r || int'(cfg_out.cols) != c) failures++;
  endtask

  task automatic read_cell(int r, int c, output int lvl);
    @(negedge clk);
    cell_row = 3'(r); cell_col = 3'(c); read_en = 1;
    @(negedge clk) read_en = 0;
    checks++;
    if (!read_valid) failures++;
    lvl = int'(read_level);
  endtask

  task automatic do_pulse(int r, int c, bit set, int step);
    int t;
    @(negedge clk);
    cell_row = 3'(r); cell_col = 3'(c); pulse.set = set; pulse.step = 8'(step); pulse_en = 1;
    @(negedge clk) pulse_en = 0;
    t = 1;
    while (!pulse_done) begin @(negedge clk); t++; end
    checks++;
    if (t != 3) begin failures++; $display("pulse latency %0d", t); end
  endtask

  task automatic program_cell(int r, int c, int target);
    int lvl, prev, ss, rs;
    ss = 0; rs = 0;
    read_cell(r, c, lvl);
    for (int k = 0; k < 200 && lvl != target; k++) begin
      prev = lvl;
      if (lvl < target) begin do_pulse(r, c, 1, ss); ss++; rs = 0; end
      else              begin do_pulse(r, c, 0, rs); rs++; ss = 0; end
      read_cell(r, c, lvl);
      checks++;
      if ((prev < target && lvl < prev) || (prev > target && lvl > prev)) begin
        failures++; $display("wrong direction at (%0d,%0d)", r, c);
      end
    end
    checks++;
    if (lvl != target) begin failures++; $display("cell (%0d,%0d) not programmed", r, c); end
  endtask

  task automatic compute(int t_expect);
    int t;
    @(negedge clk) comp_start = 1;
    @(negedge clk) comp_start = 0;
    t = 1;
    while (!comp_done) begin @(negedge clk); t++; end
    checks++;
    if (t != t_expect) begin failures++; $display("settle latency %0d", t); end
  endtask

  // Solves a[k][k] x = rhs by Gauss-Jordan elimination.
  task automatic gj(input real a [N][N], input real rhs [N], input int k, output real x [N]);
    real m [N][N+1];
    real f, t;
    int p;
    for (int i = 0; i < k; i++) begin
      for (int j = 0; j < k; j++) m[i][j] = a[i][j];
      m[i][k] = rhs[i];
    end
    for (int c = 0; c < k; c++) begin
      p = c;
      for (int r = c + 1; r < k; r++) if (fabs(m[r][c]) > fabs(m[p][c])) p = r;
      for (int j = 0; j <= k; j++) begin t = m[c][j]; m[c][j] = m[p][j]; m[p][j] = t; end
      for (int r = 0; r < k; r++) if (r != c) begin
        f = m[r][c] / m[c][c];
        for (int j = 0; j <= k; j++) m[r][j] = m[r][j] - f * m[c][j];
      end
    end
    for (int i = 0; i < k; i++) x[i] = m[i][k] / m[i][i];
  endtask

  initial begin
    real a [N][N];
    real rhs [N], x [N], ata [N][N], atb [N];
    real bound, s, mx, lam, nrm, res;
    cfg_in = '0; pulse = '0;
    for (int i = 0; i < N; i++) comp_in[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // Diagonally dominant target matrix, as in the INV benchmarks of well-conditioned matrices.
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++)
        tgt[i][j] = (i == j) ? 15 : int'($urandom % 3);
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) program_cell(i, j, tgt[i][j]);
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) a[i][j] = gc(tgt[i][j]);

    // MVM on a 6 x 8 region: y_i = sum_j G_ij x_j / 1024.
    configure(MODE_MVM, 6, 8);
    for (int t = 0; t < 10; t++) begin
      for (int j = 0; j < N; j++) comp_in[j] = 8'($urandom);
      compute(4);
      for (int i = 0; i < N; i++) begin
        s = 0.0; bound = 0.0;
        for (int j = 0; j < N; j++) begin
          s = s + a[i][j] * real'(comp_in[j]);
          bound = bound + 0.5 * LST * fabs(real'(comp_in[j]));
        end
        s = (i < 6) ? s / 1024.0 : 0.0;
        bound = (i < 6) ? bound / 1024.0 + 1.0 : 0.0;
        checks++;
        if (fabs(real'(comp_out[i]) - s) > bound) begin
          failures++; $display("MVM row %0d got %0d exp %f", i, comp_out[i], s);
        end
      end
    end

    // INV on the full 8 x 8 region: G y = x, y scaled by 1024.
    configure(MODE_INV, 8, 8);
    for (int t = 0; t < 5; t++) begin
      for (int j = 0; j < N; j++) begin comp_in[j] = 8'($urandom); rhs[j] = real'(comp_in[j]); end
      compute(4);
      gj(a, rhs, N, x);
      mx = 0.0;
      for (int i = 0; i < N; i++) if (fabs(x[i] * 1024.0) > mx) mx = fabs(x[i] * 1024.0);
      for (int i = 0; i < N; i++) begin
        checks++;
        if (fabs(real'(comp_out[i]) - x[i] * 1024.0) > 0.15 * mx + 2.0) begin
          failures++; $display("INV %0d got %0d exp %f", i, comp_out[i], x[i] * 1024.0);
        end
      end
    end

    // PINV on an 8 x 4 region: least squares, normal equations solved here.
    configure(MODE_PINV, 8, 4);
    for (int t = 0; t < 5; t++) begin
      for (int j = 0; j < N; j++) begin comp_in[j] = 8'($urandom); rhs[j] = real'(comp_in[j]); end
      compute(4);
      for (int i = 0; i < 4; i++) begin
        atb[i] = 0.0;
        for (int r = 0; r < N; r++) atb[i] = atb[i] + a[r][i] * rhs[r];
        for (int k = 0; k < 4; k++) begin
          ata[i][k] = 0.0;
          for (int r = 0; r < N; r++) ata[i][k] = ata[i][k] + a[r][i] * a[r][k];
        end
      end
      gj(ata, atb, 4, x);
      mx = 0.0;
      for (int i = 0; i < 4; i++) if (fabs(x[i] * 1024.0) > mx) mx = fabs(x[i] * 1024.0);
      for (int i = 0; i < 4; i++) begin
        checks++;
        if (fabs(real'(comp_out[i]) - x[i] * 1024.0) > 0.15 * mx + 2.0) begin
          failures++; $display("PINV %0d got %0d exp %f", i, comp_out[i], x[i] * 1024.0);
        end
      end
    end

    // EGV: G v = lambda v for the dominant eigenvector, |v| = 1024.
    configure(MODE_EGV, 8, 8);
    compute(4);
    lam = 0.0; nrm = 0.0;
    for (int i = 0; i < N; i++) begin
      s = 0.0;
      for (int j = 0; j < N; j++) s = s + a[i][j] * real'(comp_out[j]);
      lam = lam + real'(comp_out[i]) * s;
      nrm = nrm + real'(comp_out[i]) * real'(comp_out[i]);
    end
    lam = lam / nrm;
    res = 0.0;
    for (int i = 0; i < N; i++) begin
      s = 0.0;
      for (int j = 0; j < N; j++) s = s + a[i][j] * real'(comp_out[j]);
      res = res + (s - lam * real'(comp_out[i])) ** 2;
    end
    checks++;
    if ($sqrt(res) > 0.15 * lam * $sqrt(nrm)) begin failures++; $display("EGV residual"); end
    checks++;
    if (fabs($sqrt(nrm) - 1024.0) > 10.0) begin failures++; $display("EGV norm %f", $sqrt(nrm)); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
