// tb_gramc_top: end-to-end test of the GRAMC system at its default size (16 macros of
// 128 x 128 cells).
// Host side: loads ideal levels and input vectors into the global buffer and programs into
// the instruction stack, runs them and reads the output buffer. Each program programs arrays
// by on-chip write-verify, reconfigures macros and computes; results are checked against
// references computed here from the level-centre conductances 1 + L * 99/15 uS:
//   A: MVM on an 8 x 8 region, INV on the same array, EGV on it, PINV on an 8 x 4 region of
//      a second array, ReLU and max pooling of the MVM result.
//   B: bit slicing, an 8-bit weight matrix split over two arrays (upper and lower 4 bits),
//      two MVMs and their recombination in the functional module (also as a plain partial
//      sum and a difference); an INV whose results
//      saturate the ADC and whose recombination saturates the 16-bit word.
//   C: write-verify with a pulse limit of 2 (cells give up).
//   D: write-verify of a whole 128 x 128 array and a full-size MVM.
//   E: an illegal instruction.
// Each mechanism (SET and RESET pulses, pulse-limit give-up, the four modes, ReLU, pooling,
// recombination, saturation, illegal instruction) is counted and must occur at least once.
module tb_gramc_top;
  import gramc_pkg::*;
  localparam real LST = 99.0 / 15.0;
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
  // mechanism counters
  int m_set = 0, m_reset = 0, m_giveup = 0, m_mvm = 0, m_inv = 0, m_pinv = 0, m_egv = 0;
  int m_addsub = 0, m_relu = 0, m_pool = 0, m_shadd = 0, m_adc_sat = 0, m_word_sat = 0, m_illegal = 0;

  gramc_top dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    repeat (8000000) @(posedge clk);
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

  task automatic run(output int t);
    int t0;
    emit(mk(OP_HALT, 0, MODE_MVM, 1, 1, 0, 0, FOP_RELU));
    @(negedge clk) start = 1;
    t0 = cycles;
    @(negedge clk) start = 0;
    while (!done) @(negedge clk);
    t = cycles - t0;
    pc_n = 0;
  endtask

  task automatic ob_read(int a, output int v);
    @(negedge clk) ob_rd_addr = 12'(a);
    @(negedge clk) v = int'($signed(ob_rd_data));
  endtask

  task automatic gj(input real a [8][8], input real rhs [8], input int k, output real x [8]);
    real m [8][9];
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

  task automatic check_close(string what, int i, int got, real expv, real tol);
    checks++;
    if (fabs(real'(got) - expv) > tol) begin
      failures++;
      $display("%s[%0d]: got %0d expected %f (tol %f)", what, i, got, expv, tol);
    end
    if (got == 2047 || got == -2047) m_adc_sat++;
  endtask

  task automatic wv_status(int cells);
    checks++;
    if (int'(wv_n_ok) + int'(wv_n_fail) != cells) begin failures++; $display("wv cell count"); end
    m_set   += int'(wv_n_set);
    m_reset += int'(wv_n_reset);
    m_giveup += int'(wv_n_fail);
  endtask

  // Targets and inputs.
  int A [8][8];          // square matrix, macro 0
  int P [8][4];          // tall matrix, macro 1
  int W8 [4][8];         // 8-bit weights, macros 2 (upper) and 3 (lower)
  int xin [8], bin [8], sin_ [8];
  int L [128][128];      // full array, macro 15
  int xl [128];

  initial begin
    real a [8][8], rhs [8], x [8], ata [8][8], atb [8];
    real s, bound, mx, lam, nrm, res;
    int v, t, y [128], y2 [8];
    pc_n = 0;
    is_ld_data = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---------------- program A ----------------
    for (int i = 0; i < 8; i++)
      for (int j = 0; j < 8; j++) begin
        A[i][j] = (i == j) ? 15 : int'($urandom % 3);
        gb_write(i * 8 + j, A[i][j]);
        a[i][j] = gc(A[i][j]);
      end
    for (int i = 0; i < 8; i++)
      for (int j = 0; j < 4; j++) begin
        P[i][j] = (i % 4 == j) ? 12 + int'($urandom % 4) : int'($urandom % 4);
        gb_write(200 + i * 4 + j, P[i][j]);
      end
    for (int j = 0; j < 8; j++) begin
      xin[j] = int'($urandom % 256) - 128; gb_write(1000 + j, xin[j]);
      bin[j] = int'($urandom % 256) - 128; gb_write(1100 + j, bin[j]);
    end
    emit(mk(OP_CFG,   0, MODE_MVM,  8, 8, 0, 0, FOP_RELU));
    emit(mk(OP_WV,    0, MODE_MVM,  1, 1, 0, 0, FOP_RELU));
    emit(mk(OP_SOLVE, 0, MODE_MVM,  1, 1, 1000, 0, FOP_RELU));
    emit(mk(OP_CFG,   0, MODE_INV,  8, 8, 0, 0, FOP_RELU));
    emit(mk(OP_SOLVE, 0, MODE_MVM,  1, 1, 1100, 100, FOP_RELU));
    emit(mk(OP_CFG,   0, MODE_EGV,  8, 8, 0, 0, FOP_RELU));
    emit(mk(OP_SOLVE, 0, MODE_MVM,  1, 1, 0, 300, FOP_RELU));
    emit(mk(OP_CFG,   1, MODE_PINV, 8, 4, 0, 0, FOP_RELU));
    emit(mk(OP_WV,    1, MODE_MVM,  1, 1, 200, 0, FOP_RELU));
    emit(mk(OP_SOLVE, 1, MODE_MVM,  1, 1, 1100, 200, FOP_RELU));
    emit(mk(OP_FUNC,  0, MODE_MVM,  8, 1, 0, 600, FOP_RELU));
    emit(mk(OP_FUNC,  0, MODE_MVM,  8, 1, 600, 700, FOP_MAXP));
    run(t);
    checks++;
    if (error || n_instr != 13 || n_wv != 2 || n_func != 2 ||
        n_solve[0] != 1 || n_solve[1] != 1 || n_solve[2] != 1 || n_solve[3] != 1) begin
      failures++; $display("program A counters");
    end
    m_mvm += int'(n_solve[0]); m_inv += int'(n_solve[1]); m_pinv += int'(n_solve[2]); m_egv += int'(n_solve[3]);
    wv_status(32);
    $display("program A: %0d cycles", t);
    // MVM
    for (int i = 0; i < 8; i++) begin
      s = 0.0; bound = 0.0;
      for (int j = 0; j < 8; j++) begin s += a[i][j] * real'(xin[j]); bound += 0.5 * LST * fabs(real'(xin[j])); end
      ob_read(i, y[i]);
      check_close("mvm", i, y[i], s / 1024.0, bound / 1024.0 + 1.0);
    end
    // ReLU and pooling of the MVM result (exact)
    for (int i = 0; i < 8; i++) begin
      ob_read(600 + i, v);
      checks++;
      if (v != ((y[i] < 0) ? 0 : y[i])) begin failures++; $display("relu %0d", i); end
      m_relu++;
    end
    for (int k = 0; k < 2; k++) begin
      int e;
      e = 0;
      for (int j = 0; j < 4; j++) if (y[4*k+j] > e) e = y[4*k+j];
      ob_read(700 + k, v);
      checks++;
      if (v != e) begin failures++; $display("pool %0d: %0d vs %0d", k, v, e); end
      m_pool++;
    end
    // INV
    for (int j = 0; j < 8; j++) rhs[j] = real'(bin[j]);
    gj(a, rhs, 8, x);
    mx = 0.0;
    for (int i = 0; i < 8; i++) if (fabs(x[i]) * 1024.0 > mx) mx = fabs(x[i]) * 1024.0;
    for (int i = 0; i < 8; i++) begin
      ob_read(100 + i, v);
      check_close("inv", i, v, x[i] * 1024.0, 0.15 * mx + 2.0);
    end
    // EGV: residual of G v = lambda v
    for (int i = 0; i < 8; i++) ob_read(300 + i, y2[i]);
    lam = 0.0; nrm = 0.0; res = 0.0;
    for (int i = 0; i < 8; i++) begin
      s = 0.0;
      for (int j = 0; j < 8; j++) s += a[i][j] * real'(y2[j]);
      lam += real'(y2[i]) * s;
      nrm += real'(y2[i]) * real'(y2[i]);
    end
    lam = lam / nrm;
    for (int i = 0; i < 8; i++) begin
      s = 0.0;
      for (int j = 0; j < 8; j++) s += a[i][j] * real'(y2[j]);
      res += (s - lam * real'(y2[i])) ** 2;
    end
    checks += 2;
    if ($sqrt(res) > 0.15 * lam * $sqrt(nrm)) begin failures++; $display("egv residual"); end
    if (fabs($sqrt(nrm) - 1024.0) > 10.0) begin failures++; $display("egv norm"); end
    // PINV: least squares through the normal equations
    for (int i = 0; i < 4; i++) begin
      atb[i] = 0.0;
      for (int r = 0; r < 8; r++) atb[i] += gc(P[r][i]) * real'(bin[r]);
      for (int k = 0; k < 4; k++) begin
        ata[i][k] = 0.0;
        for (int r = 0; r < 8; r++) ata[i][k] += gc(P[r][i]) * gc(P[r][k]);
      end
    end
    gj(ata, atb, 4, x);
    mx = 0.0;
    for (int i = 0; i < 4; i++) if (fabs(x[i]) * 1024.0 > mx) mx = fabs(x[i]) * 1024.0;
    for (int i = 0; i < 4; i++) begin
      ob_read(200 + i, v);
      check_close("pinv", i, v, x[i] * 1024.0, 0.2 * mx + 2.0);
    end

    // ---------------- program B: bit slicing and saturation ----------------
    for (int i = 0; i < 4; i++)
      for (int j = 0; j < 8; j++) begin
        W8[i][j] = int'($urandom % 256);
        gb_write(3000 + i * 8 + j, W8[i][j] >> 4);
        gb_write(3100 + i * 8 + j, W8[i][j] & 15);
      end
    for (int j = 0; j < 8; j++) begin sin_[j] = int'($urandom % 128); gb_write(1200 + j, sin_[j]); end
    for (int i = 0; i < 4; i++)
      for (int j = 0; j < 4; j++) gb_write(3200 + i * 4 + j, (i == j) ? 1 : 0);
    for (int j = 0; j < 4; j++) gb_write(1300 + j, 127);
    emit(mk(OP_CFG,   2, MODE_MVM, 4, 8, 0, 0, FOP_RELU));
    emit(mk(OP_CFG,   3, MODE_MVM, 4, 8, 0, 0, FOP_RELU));
    emit(mk(OP_WV,    2, MODE_MVM, 1, 1, 3000, 0, FOP_RELU));
    emit(mk(OP_WV,    3, MODE_MVM, 1, 1, 3100, 0, FOP_RELU));
    emit(mk(OP_SOLVE, 2, MODE_MVM, 1, 1, 1200, 400, FOP_RELU));
    emit(mk(OP_SOLVE, 3, MODE_MVM, 1, 1, 1200, 404, FOP_RELU));
    emit(mk(OP_FUNC,  0, MODE_MVM, 4, 1, 400, 500, FOP_SHADD));
    emit(mk(OP_FUNC,  0, MODE_MVM, 4, 1, 400, 520, FOP_ADD));
    emit(mk(OP_FUNC,  0, MODE_MVM, 4, 1, 400, 540, FOP_SUB));
    emit(mk(OP_CFG,   5, MODE_INV, 4, 4, 0, 0, FOP_RELU));
    emit(mk(OP_WV,    5, MODE_MVM, 1, 1, 3200, 0, FOP_RELU));
    emit(mk(OP_SOLVE, 5, MODE_MVM, 1, 1, 1300, 800, FOP_RELU));
    emit(mk(OP_FUNC,  0, MODE_MVM, 2, 1, 800, 810, FOP_SHADD));
    run(t);
    checks++;
    if (error || n_func != 4) begin failures++; $display("program B status"); end
    m_mvm += int'(n_solve[0]); m_inv += int'(n_solve[1]);
    wv_status(16);
    $display("program B: %0d cycles", t);
    for (int i = 0; i < 4; i++) begin
      int hi, lo, r;
      real ex, bnd;
      ob_read(400 + i, hi);
      ob_read(404 + i, lo);
      ob_read(500 + i, r);
      checks++;
      if (r != hi * 16 + lo) begin failures++; $display("shadd %0d", i); end
      m_shadd++;
      ob_read(520 + i, r);
      checks++;
      if (r != hi + lo) begin failures++; $display("add %0d", i); end
      ob_read(540 + i, r);
      checks++;
      if (r != hi - lo) begin failures++; $display("sub %0d", i); end
      m_addsub++;
      ob_read(500 + i, r);
      // Compare with the 8-bit weights: G_hi*16 + G_lo carries 17 times the 1 uS offset.
      ex = 0.0; bnd = 0.0;
      for (int j = 0; j < 8; j++) begin
        ex  += (16.0 * gc(W8[i][j] >> 4) + gc(W8[i][j] & 15)) * real'(sin_[j]);
        bnd += 17.0 * 0.5 * LST * real'(sin_[j]);
      end
      check_close("slice", i, r, ex / 1024.0, bnd / 1024.0 + 17.0);
    end
    for (int i = 0; i < 4; i++) begin
      ob_read(800 + i, v);
      checks++;
      if (v != 2047) begin failures++; $display("adc saturation expected, got %0d", v); end
      else m_adc_sat++;
    end
    for (int i = 0; i < 2; i++) begin
      ob_read(810 + i, v);
      checks++;
      if (v != 32767) begin failures++; $display("word saturation expected, got %0d", v); end
    end
    m_word_sat = int'(fu_sat_count);
    checks++;
    if (fu_sat_count != 2) failures++;

    // ---------------- program C: pulse limit ----------------
    emit(mk(OP_CFG, 4, MODE_MVM, 8, 8, 0, 0, FOP_RELU));
    emit(mk(OP_WV,  4, MODE_MVM, 1, 1, 0, 2, FOP_RELU));
    run(t);
    wv_status(64);
    checks++;
    if (wv_n_fail == 0) begin failures++; $display("pulse limit never reached"); end
    $display("program C: %0d cycles, %0d of 64 cells gave up", t, wv_n_fail);

    // ---------------- program D: full 128 x 128 array ----------------
    for (int i = 0; i < 128; i++)
      for (int j = 0; j < 128; j++) begin
        L[i][j] = int'($urandom % 16);
        gb_write(4096 + i * 128 + j, L[i][j]);
      end
    for (int j = 0; j < 128; j++) begin xl[j] = int'($urandom % 128); gb_write(1400 + j, xl[j]); end
    emit(mk(OP_CFG,   15, MODE_MVM, 128, 128, 0, 0, FOP_RELU));
    emit(mk(OP_WV,    15, MODE_MVM, 1, 1, 4096, 0, FOP_RELU));
    emit(mk(OP_SOLVE, 15, MODE_MVM, 1, 1, 1400, 1000, FOP_RELU));
    run(t);
    wv_status(16384);
    m_mvm += int'(n_solve[0]);
    $display("program D: %0d cycles, ok=%0d fail=%0d set=%0d reset=%0d", t, wv_n_ok, wv_n_fail, wv_n_set, wv_n_reset);
    for (int i = 0; i < 128; i++) begin
      s = 0.0; bound = 0.0;
      for (int j = 0; j < 128; j++) begin s += gc(L[i][j]) * real'(xl[j]); bound += 0.5 * LST * real'(xl[j]); end
      ob_read(1000 + i, v);
      check_close("mvm128", i, v, s / 1024.0, bound / 1024.0 + 1.0);
    end

    // ---------------- program E: illegal instruction ----------------
    emit(mk(OP_CFG, 0, MODE_INV, 8, 4, 0, 0, FOP_RELU));   // INV needs a square region
    run(t);
    checks++;
    if (!error) begin failures++; $display("illegal instruction not flagged"); end
    else m_illegal++;

    $display("mechanisms: set=%0d reset=%0d giveup=%0d mvm=%0d inv=%0d pinv=%0d egv=%0d relu=%0d pool=%0d shadd=%0d addsub=%0d adc_sat=%0d word_sat=%0d illegal=%0d",
             m_set, m_reset, m_giveup, m_mvm, m_inv, m_pinv, m_egv, m_relu, m_pool, m_shadd, m_addsub, m_adc_sat, m_word_sat, m_illegal);
    checks++;
    if (m_set == 0 || m_reset == 0 || m_giveup == 0 || m_mvm == 0 || m_inv == 0 || m_pinv == 0 ||
        m_egv == 0 || m_relu == 0 || m_pool == 0 || m_shadd == 0 || m_adc_sat == 0 ||
        m_word_sat == 0 || m_illegal == 0 || m_addsub == 0) begin
      failures++; $display("a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
