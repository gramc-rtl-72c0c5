// tb_gramc_workloads: the evaluated workloads at their full sizes, run on the whole GRAMC
// system at its default size (16 macros of 128 x 128 cells).
//   1. INV : a 128 x 128 matrix solved as G y = b on macro 0.
//   2. EGV : the dominant eigenvector of a 128 x 128 Gram matrix on macro 1.
//   3. PINV: a 128-sample, 6-feature linear regression on macro 2.
//   4. The fully connected layers of LeNet-5 (256 -> 120 -> 84 -> 10) with signed 4-bit
//      weights. Each sign has its own array: fc1 needs four arrays (two input halves of 128,
//      two signs) joined by ADD and SUB in the functional module, fc2 and fc3 two each. ReLU
//      follows fc1 and fc2. The host moves the activations between layers, scaling them
//      back to the 8-bit input range with a right shift.
//   5. LeNet-5 conv1 for one 2 x 2 pooling window: the convolution as an unrolled MVM on
//      two arrays, then the difference, max pooling and ReLU in the functional module.
// Matrices are programmed by on-chip write-verify from 4-bit levels held in the global
// buffer. Two kinds of check are made:
//   - exact: the analog result against the same problem solved here on the conductances the
//     write-verify actually left in the array (read through the model's hierarchy), which
//     tests the reconfiguration, data movement and scaling to within the ADC rounding;
//   - accuracy: the result against the ideal matrix (level-centre conductances
//     1 + L * 99/15 uS). The relative error is printed; it comes from the 4-bit
//     quantisation of the programming (a verified cell may sit anywhere within half a
//     level of its target) and must stay below a bound per workload: 0.4 for INV, whose
//     many level-0 off-diagonal cells all err upwards, 0.3 for the layers, 0.25 otherwise.
// The whole test takes about 7 million cycles.
// Since a single array holds only positive conductances, the INV and EGV matrices are
// positive: a strong diagonal plus small off-diagonal entries for INV (in place of a
// Wishart matrix), and X^T X of a non-negative X for EGV.
module tb_gramc_workloads;
  import gramc_pkg::*;
  localparam real LST = 99.0 / 15.0;
  localparam int  MB  = 4096;    // global-buffer base of the matrix levels
  logic clk = 0, rst_n = 0;
  logic is_ld_en = 0, gb_wr_en = 0, start = 0;
  logic [7:0] is_ld_addr = 0;
  instr_t is_ld_data;
  logic [15:0] gb_wr_addr = 0;
  logic [7:0] gb_wr_data = 0;
  logic [11:0] ob_rd_addr = 0;
  logic [15:0] ob_rd_data;
  logic busy, done, error;
  logic [15:0] wv_n_ok, wv_n_fail, n_instr, n_wv, n_func, fu_sat_count;
  logic [31:0] wv_n_set, wv_n_reset;
  logic [15:0] n_solve [4];
  logic [2:0] cu_flags;
  int checks = 0, failures = 0;
  int cycles = 0;
  int pc_n;

  gramc_top dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    repeat (40000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real fabs(real v);
    return (v < 0.0) ? -v : v;
  endfunction

  function automatic real gc(int l);
    return 1.0 + LST * real'(l);
  endfunction

  function automatic instr_t mk(opcode_e op, int m, mode_e md, int r, int c, int s, int d, fop_e f);
    instr_t i;
    i.op = op; i.macro = 4'(m); i.mode = md; i.rows = 8'(r); i.cols = 8'(c);
    i.src = 16'(s); i.dst = 16'(d); i.fop = f; i.rsvd = '0;
    return i;
  endfunction

  task automatic gb_write(int a, int v);
    @(negedge clk);
    gb_wr_en = 1; gb_wr_addr = 16'(a); gb_wr_data = 8'(v);
    @(negedge clk) gb_wr_en = 0;
  endtask

  task automatic emit(instr_t i);
    @(negedge clk);
    is_ld_en = 1; is_ld_addr = 8'(pc_n); is_ld_data = i;
    @(negedge clk) is_ld_en = 0;
    pc_n++;
  endtask

  task automatic run(string name);
    int t0;
    emit(mk(OP_HALT, 0, MODE_MVM, 1, 1, 0, 0, FOP_RELU));
    @(negedge clk) start = 1;
    t0 = cycles;
    @(negedge clk) start = 0;
    while (!done) @(negedge clk);
    pc_n = 0;
    $display("%s: %0d cycles, %0d instructions, write-verify ok=%0d fail=%0d set=%0d reset=%0d",
             name, cycles - t0, n_instr, wv_n_ok, wv_n_fail, wv_n_set, wv_n_reset);
    checks++;
    if (error) begin failures++; $display("%s: error flag", name); end
  endtask

  task automatic ob_read(int a, output int v);
    @(negedge clk) ob_rd_addr = 12'(a);
    @(negedge clk) v = int'($signed(ob_rd_data));
  endtask

  task automatic check_close(string what, int i, real got, real expv, real tol);
    checks++;
    if (fabs(got - expv) > tol) begin
      failures++;
      $display("%s[%0d]: got %f expected %f (tol %f)", what, i, got, expv, tol);
    end
  endtask

  task automatic check_rel(string what, real err, real bound);
    $display("%s: relative error %f against the ideal matrix (bound %f)", what, err, bound);
    checks++;
    if (err > bound) begin failures++; $display("%s: relative error too large", what); end
  endtask

  // Working storage. ga holds the conductances of the array under test, gi the ideal ones.
  int  lv [128][128];
  real ga [128][128];
  real gi [128][128];
  real am [128][129];
  real xs [128];
  real r1 [128];
  real r2 [128];
  int  yo [128];
  int  xin [256];

  // Gaussian elimination with partial pivoting on am[0..k-1][0..k], solution in xs.
  task automatic gauss(int k);
    real f, t;
    int p;
    for (int c = 0; c < k; c++) begin
      p = c;
      for (int r = c + 1; r < k; r++) if (fabs(am[r][c]) > fabs(am[p][c])) p = r;
      for (int j = 0; j <= k; j++) begin t = am[c][j]; am[c][j] = am[p][j]; am[p][j] = t; end
      for (int r = c + 1; r < k; r++) begin
        f = am[r][c] / am[c][c];
        for (int j = c; j <= k; j++) am[r][j] = am[r][j] - f * am[c][j];
      end
    end
    for (int r = k - 1; r >= 0; r--) begin
      t = am[r][k];
      for (int j = r + 1; j < k; j++) t = t - am[r][j] * xs[j];
      xs[r] = t / am[r][r];
    end
  endtask

  // Solve (g) y = b for the n x n matrix (ideal when ideal is set), result in xs.
  task automatic inv_ref(bit ideal, int n, int b []);
    for (int i = 0; i < n; i++) begin
      for (int j = 0; j < n; j++) am[i][j] = ideal ? gi[i][j] : ga[i][j];
      am[i][n] = real'(b[i]);
    end
    gauss(n);
  endtask

  // Least squares for the n x m matrix, result in xs.
  task automatic pinv_ref(bit ideal, int n, int m, int b []);
    real s;
    for (int i = 0; i < m; i++) begin
      for (int k = 0; k < m; k++) begin
        s = 0.0;
        for (int r = 0; r < n; r++)
          s += (ideal ? gi[r][i] * gi[r][k] : ga[r][i] * ga[r][k]);
        am[i][k] = s;
      end
      s = 0.0;
      for (int r = 0; r < n; r++) s += (ideal ? gi[r][i] : ga[r][i]) * real'(b[r]);
      am[i][m] = s;
    end
    gauss(m);
  endtask

  // Dominant eigenvector by power iteration, unit norm, result in xs.
  task automatic egv_ref(bit ideal, int n, int iters);
    real s, nrm;
    real y [128];
    for (int i = 0; i < n; i++) xs[i] = 1.0;
    for (int it = 0; it < iters; it++) begin
      nrm = 0.0;
      for (int i = 0; i < n; i++) begin
        s = 0.0;
        for (int j = 0; j < n; j++) s += (ideal ? gi[i][j] : ga[i][j]) * xs[j];
        y[i] = s;
        nrm += s * s;
      end
      nrm = $sqrt(nrm);
      for (int i = 0; i < n; i++) xs[i] = y[i] / nrm;
    end
  endtask

  function automatic real rel_err(real a [128], real b [128], int n);
    real d, s;
    d = 0.0; s = 0.0;
    for (int i = 0; i < n; i++) begin d += (a[i] - b[i]) ** 2; s += b[i] ** 2; end
    return $sqrt(d / s);
  endfunction

  // Level matrix lv[0..n-1][0..m-1] into the global buffer at MB, ideal conductances to gi.
  task automatic load_levels(int n, int m, int base);
    for (int i = 0; i < n; i++)
      for (int j = 0; j < m; j++) begin
        gb_write(base + i * m + j, lv[i][j]);
        gi[i][j] = gc(lv[i][j]);
      end
  endtask

  // Copy of the conductances that write-verify left in macro k.
  task automatic grab(int k, int n, int m);
    for (int i = 0; i < n; i++)
      for (int j = 0; j < m; j++)
        case (k)
          0: ga[i][j] = dut.u_mg.g_mac[0].u_mac.g[i][j];
          1: ga[i][j] = dut.u_mg.g_mac[1].u_mac.g[i][j];
          default: ga[i][j] = dut.u_mg.g_mac[2].u_mac.g[i][j];
        endcase
  endtask

  // ---------------- LeNet-5 fully connected layers ----------------
  // Signed weight levels w in -15..15 of one layer: the positive part goes to one array,
  // the negative part to another. The reference is the ideal signed product.
  int wl [128][256];

  task automatic fc_layer(string name, int n_out, int n_in, int mac0, bit relu,
                          output int y []);
    int half, nh, v;
    int xq [];
    real ex, bnd, err, ssum;
    half = (n_in > 128) ? 2 : 1;
    nh = n_in / half;
    // program the arrays: for each half, a positive and a negative one
    for (int h = 0; h < half; h++)
      for (int sg = 0; sg < 2; sg++) begin
        for (int i = 0; i < n_out; i++)
          for (int j = 0; j < nh; j++) begin
            v = wl[i][h * nh + j];
            gb_write(MB + (2 * h + sg) * n_out * nh + i * nh + j, (sg != 0) ? ((v < 0) ? -v : 0) : ((v > 0) ? v : 0));
          end
      end
    for (int j = 0; j < n_in; j++) gb_write(j, xin[j]);
    for (int h = 0; h < half; h++)
      for (int sg = 0; sg < 2; sg++) begin
        emit(mk(OP_CFG, mac0 + 2 * h + sg, MODE_MVM, n_out, nh, 0, 0, FOP_RELU));
        emit(mk(OP_WV,  mac0 + 2 * h + sg, MODE_MVM, 1, 1, MB + (2 * h + sg) * n_out * nh, 0, FOP_RELU));
      end
    // partial products, n_out words each: the positive halves first, then the negative ones
    for (int sg = 0; sg < 2; sg++)
      for (int h = 0; h < half; h++)
        emit(mk(OP_SOLVE, mac0 + 2 * h + sg, MODE_MVM, 1, 1, h * nh, (sg * half + h) * n_out, FOP_RELU));
    if (half == 2) begin
      emit(mk(OP_FUNC, 0, MODE_MVM, n_out, 1, 0,         1024,         FOP_ADD));
      emit(mk(OP_FUNC, 0, MODE_MVM, n_out, 1, 2 * n_out, 1024 + n_out, FOP_ADD));
      emit(mk(OP_FUNC, 0, MODE_MVM, n_out, 1, 1024,      2048,         FOP_SUB));
    end else begin
      emit(mk(OP_FUNC, 0, MODE_MVM, n_out, 1, 0,         2048,         FOP_SUB));
    end
    if (relu) emit(mk(OP_FUNC, 0, MODE_MVM, n_out, 1, 2048, 3072, FOP_RELU));
    run(name);
    checks++;
    if (n_wv != 16'(2 * half) || n_solve[0] != 16'(2 * half)) begin
      failures++; $display("%s: instruction counters", name);
    end
    y = new[n_out];
    err = 0.0; ssum = 0.0;
    for (int i = 0; i < n_out; i++) begin
      ob_read(relu ? 3072 + i : 2048 + i, y[i]);
      ex = 0.0; bnd = 0.0;
      for (int j = 0; j < n_in; j++) begin
        ex  += LST * real'(wl[i][j]) * real'(xin[j]);
        bnd += 0.5 * LST * real'(xin[j]);
      end
      ex = ex / 1024.0;
      // each of the 2*half partial products is rounded once; the level error of a cell is
      // under half a level and the offsets of the two signs cancel
      bnd = 2.0 * bnd / 1024.0 + real'(2 * half);
      r1[i] = real'(y[i]);
      r2[i] = (relu && ex < 0.0) ? 0.0 : ex;
      check_close(name, i, r1[i], r2[i], bnd);
    end
    for (int i = n_out; i < 128; i++) begin r1[i] = 0.0; r2[i] = 0.0; end
    check_rel(name, rel_err(r1, r2, n_out), 0.3);
  endtask

  // Next layer's input: the activations scaled into 0..127 by a right shift.
  task automatic rescale(int y [], int n);
    int mx, sh;
    mx = 0;
    for (int i = 0; i < n; i++) if (y[i] > mx) mx = y[i];
    sh = 0;
    while ((mx >> sh) > 127) sh++;
    for (int i = 0; i < n; i++) xin[i] = (y[i] < 0) ? 0 : (y[i] >> sh);
  endtask

  initial begin
    int b [];
    int y1 [], y2 [], y3 [];
    real s, err, dotp, na;
    int best, best_ref;
    real xt [6];
    pc_n = 0;
    is_ld_data = '0;
    b = new[128];
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---------------- 1. INV, 128 x 128 ----------------
    for (int i = 0; i < 128; i++)
      for (int j = 0; j < 128; j++)
        lv[i][j] = (i == j) ? 15 : (($urandom % 8 == 0) ? 1 : 0);
    load_levels(128, 128, MB);
    for (int i = 0; i < 128; i++) begin b[i] = int'($urandom % 161) - 80; gb_write(i, b[i]); end
    emit(mk(OP_CFG,   0, MODE_INV, 128, 128, 0, 0, FOP_RELU));
    emit(mk(OP_WV,    0, MODE_MVM, 1, 1, MB, 0, FOP_RELU));
    emit(mk(OP_SOLVE, 0, MODE_MVM, 1, 1, 0, 0, FOP_RELU));
    run("INV 128x128");
    checks++;
    if (n_solve[1] != 1 || wv_n_ok + wv_n_fail != 16384) begin failures++; $display("INV counters"); end
    for (int i = 0; i < 128; i++) ob_read(i, yo[i]);
    grab(0, 128, 128);
    inv_ref(0, 128, b);
    for (int i = 0; i < 128; i++) check_close("inv exact", i, real'(yo[i]), xs[i] * 1024.0, 1.0);
    inv_ref(1, 128, b);
    for (int i = 0; i < 128; i++) begin r1[i] = real'(yo[i]); r2[i] = xs[i] * 1024.0; end
    check_rel("INV 128x128", rel_err(r1, r2, 128), 0.4);

    // ---------------- 2. EGV, 128 x 128 Gram matrix ----------------
    begin
      int xg [12][128];
      int mxg;
      for (int k = 0; k < 12; k++)
        for (int j = 0; j < 128; j++) xg[k][j] = int'($urandom % 4);
      mxg = 0;
      for (int i = 0; i < 128; i++)
        for (int j = 0; j < 128; j++) begin
          lv[i][j] = 0;
          for (int k = 0; k < 12; k++) lv[i][j] += xg[k][i] * xg[k][j];
          if (lv[i][j] > mxg) mxg = lv[i][j];
        end
      for (int i = 0; i < 128; i++)
        for (int j = 0; j < 128; j++) lv[i][j] = (lv[i][j] * 15 + mxg / 2) / mxg;
    end
    load_levels(128, 128, MB);
    emit(mk(OP_CFG,   1, MODE_EGV, 128, 128, 0, 0, FOP_RELU));
    emit(mk(OP_WV,    1, MODE_MVM, 1, 1, MB, 0, FOP_RELU));
    emit(mk(OP_SOLVE, 1, MODE_MVM, 1, 1, 0, 128, FOP_RELU));
    run("EGV 128x128");
    checks++;
    if (n_solve[3] != 1 || wv_n_ok + wv_n_fail != 16384) begin failures++; $display("EGV counters"); end
    for (int i = 0; i < 128; i++) ob_read(128 + i, yo[i]);
    grab(1, 128, 128);
    egv_ref(0, 128, 200);
    for (int i = 0; i < 128; i++) check_close("egv exact", i, real'(yo[i]), xs[i] * 1024.0, 1.0);
    egv_ref(1, 128, 200);
    dotp = 0.0; na = 0.0;
    for (int i = 0; i < 128; i++) begin
      r1[i] = real'(yo[i]); r2[i] = xs[i] * 1024.0;
      dotp += r1[i] * xs[i]; na += r1[i] * r1[i];
    end
    check_rel("EGV 128x128", rel_err(r1, r2, 128), 0.25);
    $display("EGV 128x128: cosine with the ideal eigenvector %f", dotp / $sqrt(na));

    // ---------------- 3. PINV, 128 x 6 linear regression ----------------
    for (int j = 0; j < 6; j++) xt[j] = (real'($urandom % 1000) / 1000.0 - 0.3) * 0.3;
    for (int i = 0; i < 128; i++) begin
      for (int j = 0; j < 6; j++) begin
        lv[i][j] = (j == 0) ? 15 : int'($urandom % 16);   // feature 0 is the constant term
        gi[i][j] = gc(lv[i][j]);
      end
      s = 0.0;
      for (int j = 0; j < 6; j++) s += gi[i][j] * xt[j];
      s += real'(int'($urandom % 9) - 4);                   // observation noise
      b[i] = (s > 127.0) ? 127 : (s < -128.0) ? -128 : int'(s);
      gb_write(i, b[i]);
    end
    load_levels(128, 6, MB);
    emit(mk(OP_CFG,   2, MODE_PINV, 128, 6, 0, 0, FOP_RELU));
    emit(mk(OP_WV,    2, MODE_MVM, 1, 1, MB, 0, FOP_RELU));
    emit(mk(OP_SOLVE, 2, MODE_MVM, 1, 1, 0, 256, FOP_RELU));
    run("PINV 128x6");
    checks++;
    if (n_solve[2] != 1 || wv_n_ok + wv_n_fail != 768) begin failures++; $display("PINV counters"); end
    for (int i = 0; i < 6; i++) ob_read(256 + i, yo[i]);
    grab(2, 128, 6);
    pinv_ref(0, 128, 6, b);
    for (int i = 0; i < 6; i++) check_close("pinv exact", i, real'(yo[i]), xs[i] * 1024.0, 1.0);
    pinv_ref(1, 128, 6, b);
    for (int i = 0; i < 128; i++) begin
      r1[i] = (i < 6) ? real'(yo[i]) : 0.0;
      r2[i] = (i < 6) ? xs[i] * 1024.0 : 0.0;
    end
    check_rel("PINV 128x6", rel_err(r1, r2, 6), 0.25);
    for (int i = 0; i < 6; i++) r2[i] = xt[i] * 1024.0;
    $display("PINV 128x6: relative error %f against the generating coefficients",
             rel_err(r1, r2, 6));

    // ---------------- 4. LeNet-5 fully connected layers ----------------
    for (int j = 0; j < 256; j++) xin[j] = int'($urandom % 128);
    for (int i = 0; i < 120; i++)
      for (int j = 0; j < 256; j++) wl[i][j] = int'($urandom % 31) - 15;
    fc_layer("fc1 256->120", 120, 256, 3, 1, y1);
    rescale(y1, 120);
    for (int i = 0; i < 84; i++)
      for (int j = 0; j < 120; j++) wl[i][j] = int'($urandom % 31) - 15;
    fc_layer("fc2 120->84", 84, 120, 7, 1, y2);
    rescale(y2, 84);
    for (int i = 0; i < 10; i++)
      for (int j = 0; j < 84; j++) wl[i][j] = int'($urandom % 31) - 15;
    fc_layer("fc3 84->10", 10, 84, 9, 0, y3);
    best = 0; best_ref = 0;
    for (int i = 1; i < 10; i++) begin
      if (y3[i] > y3[best]) best = i;
      if (r2[i] > r2[best_ref]) best_ref = i;
    end
    $display("fc3: class %0d, ideal %0d", best, best_ref);

    // ---------------- 5. LeNet-5 conv1, one 2 x 2 pooling window ----------------
    // The 5 x 5 convolution is unrolled over a 6 x 6 pixel patch: row 4*c + p holds kernel c
    // shifted to window position p = 2*py + px, so each channel's four window positions are
    // adjacent and the 4-wide max pooling takes them in one step; ReLU follows (it commutes
    // with the maximum).
    begin
      int kw [6][5][5];
      int yc [];
      int v, e;
      for (int c = 0; c < 6; c++)
        for (int ky = 0; ky < 5; ky++)
          for (int kx = 0; kx < 5; kx++) kw[c][ky][kx] = int'($urandom % 31) - 15;
      for (int c = 0; c < 6; c++)
        for (int p = 0; p < 4; p++)
          for (int y = 0; y < 6; y++)
            for (int x = 0; x < 6; x++)
              wl[4 * c + p][6 * y + x] =
                (y - p / 2 >= 0 && y - p / 2 < 5 && x - p % 2 >= 0 && x - p % 2 < 5) ?
                kw[c][y - p / 2][x - p % 2] : 0;
      for (int j = 0; j < 36; j++) xin[j] = int'($urandom % 128);
      fc_layer("conv1 6x6 patch", 24, 36, 11, 0, yc);
      emit(mk(OP_FUNC, 0, MODE_MVM, 24, 1, 2048, 3072, FOP_MAXP));
      emit(mk(OP_FUNC, 0, MODE_MVM, 6,  1, 3072, 3200, FOP_RELU));
      run("conv1 pool + ReLU");
      for (int c = 0; c < 6; c++) begin
        e = 0;
        for (int p = 0; p < 4; p++) if (yc[4 * c + p] > e) e = yc[4 * c + p];
        ob_read(3200 + c, v);
        checks++;
        if (v != e) begin failures++; $display("conv1 pool[%0d]: got %0d expected %0d", c, v, e); end
      end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
