// amc_macro: behavioural model of one reconfigurable analog matrix computing (AMC) macro.
// This is not synthesizable logic: the array, drivers, DAC, transmission gates, OPAs and ADC
// are analog and are modelled with real arithmetic. Only the register array is RTL.
//
// A macro is a 128 x 128 1T1R RRAM crosspoint array with WL/BL/SL drivers, DACs on the
// inputs, a column of OPAs that transmission gates connect either as TIAs or as analog
// inverters, ADCs and an output buffer stage. Its register array (reg_array) selects the
// computing function and the active region (the top-left rows x cols corner):
//   MVM  : y_i = sum_j G_ij x_j                      (x from the DACs, y through the TIAs)
//   INV  : solves G y = x for a square region        (array in the OPA feedback)
//   PINV : y = (G^T G)^-1 G^T x for rows >= cols     (least squares, two-stage loop)
//   EGV  : dominant eigenvector of G, unit norm      (array and inverters in a loop)
// with G in uS and x the signed DAC code. The results are scaled by MVM_GAIN, INV_GAIN or
// EGV_GAIN, rounded and saturated to a signed ADC_BITS code. The sign inversions of the real
// inverting amplifiers are folded into the gains. The circuits settle to the exact solution
// of the ideal equations after SETTLE_CYCLES; analog noise and amplifier limits are not
// modelled, only the deviation of each programmed conductance from its target.
//
// The model reads the circuit topology and the active region from the switch controls that
// the register array decodes, not from the stored mode, so the decode is exercised too.
//
// Programming follows the paper's 1T1R scheme: a SET pulse raises the conductance with a
// gate voltage V_g = V_g0 + step * VG_STEP (V_SL grounded, V_BL = V_set), a RESET pulse
// lowers it with V_SL = V_SL0 + step * VSL_STEP. The device is a simple empirical stand-in
// for the filament model the paper uses: each pulse moves the conductance by
// K * (step+1) * voltage step, times a random factor in [0.75, 1.25), clipped to 1..100 uS.
// A verify read quantises the conductance to one of 16 levels, level L centred on
// 1 + L * 99/15 uS. Step sizes 0.01 V and 0.02 V are those shown in the paper's switching
// plots; the constants K and the starting state (level 0 plus up to 5 uS) are this design's.
//
// Timing: a pulse (`pulse_en`) ends with `pulse_done` PULSE_CYCLES cycles later (30 ns pulse
// width at an assumed 100 MHz clock); a read (`read_en`) returns `read_level` with
// `read_valid` one cycle later; a computation (`comp_start`) ends with `comp_done`
// SETTLE_CYCLES cycles later. One request at a time.
module amc_macro
  import gramc_pkg::*;
#(
  parameter int unsigned N             = ARRAY_N,
  parameter int unsigned SEED          = 1,
  parameter int unsigned PULSE_CYCLES  = 3,
  parameter int unsigned SETTLE_CYCLES = 4,
  parameter int unsigned EGV_ITERS     = 200,
  parameter real         GMIN          = 1.0,     // uS, level 0
  parameter real         GMAX          = 100.0,   // uS, level 15
  parameter real         VG_STEP       = 0.01,    // V per SET step
  parameter real         VSL_STEP      = 0.02,    // V per RESET step
  parameter real         SET_K         = 40.0,    // uS per V of gate step
  parameter real         RST_K         = 20.0,    // uS per V of source-line step
  parameter real         MVM_GAIN      = 1.0 / 1024.0,
  parameter real         INV_GAIN      = 1024.0,
  parameter real         EGV_GAIN      = 1024.0
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // register array
  input  logic                        cfg_we,
  input  macro_cfg_t                  cfg_in,
  output macro_cfg_t                  cfg_out,
  // cell access through the WL/BL/SL drivers
  input  logic [$clog2(N)-1:0]        cell_row,
  input  logic [$clog2(N)-1:0]        cell_col,
  input  logic                        pulse_en,
  input  pulse_t                      pulse,
  output logic                        pulse_done,
  input  logic                        read_en,
  output logic                        read_valid,
  output logic [LEVEL_BITS-1:0]       read_level,
  // computation
  input  logic                        comp_start,
  input  logic signed [DAC_BITS-1:0]  comp_in  [N],
  output logic                        comp_busy,
  output logic                        comp_done,
  output logic signed [ADC_BITS-1:0]  comp_out [N]
);
  localparam real LSTEP  = (GMAX - GMIN) / real'(N_LEVELS - 1);
  localparam int  ADCMAX = 2**(ADC_BITS-1) - 1;

  logic [N-1:0] row_en, col_en;
  logic tg_tia, tg_fb_array, tg_second_stage, tg_input;
  mode_e topo;

  reg_array #(.N(N)) u_reg (
    .clk, .rst_n, .we(cfg_we), .cfg_in, .cfg(cfg_out),
    .row_en, .col_en, .tg_tia, .tg_fb_array, .tg_second_stage, .tg_input
  );

  real g  [N][N];     // cell conductances, uS
  real am [N][N+1];   // working matrix of the solvers
  real xv [N];
  real yv [N];
  int  n_act, m_act;
  int  pcnt, scnt;
  bit  sing;

  function automatic real noise();
    return 0.75 + 0.5 * real'($urandom % 1000) / 1000.0;
  endfunction

  function automatic logic [LEVEL_BITS-1:0] quantise(real gv);
    real l;
    l = (gv - GMIN) / LSTEP + 0.5;
    if (l < 0.0) l = 0.0;
    if (l > real'(N_LEVELS - 1)) l = real'(N_LEVELS - 1);
    return LEVEL_BITS'($rtoi(l));
  endfunction

  function automatic logic signed [ADC_BITS-1:0] adc(real v);
    if (v >  real'(ADCMAX)) return ADC_BITS'(ADCMAX);
    if (v < -real'(ADCMAX)) return ADC_BITS'(-ADCMAX);
    if (v >= 0.0) return ADC_BITS'($rtoi(v + 0.5));
    return ADC_BITS'(-$rtoi(-v + 0.5));
  endfunction

  // Gaussian elimination with partial pivoting on am[0..k-1][0..k], solution in yv.
  task automatic solve_linear(input int k);
    int  p;
    real t, f;
    sing = 1'b0;
    for (int c = 0; c < k; c++) begin
      p = c;
      for (int r = c + 1; r < k; r++)
        if ((am[r][c] < 0.0 ? -am[r][c] : am[r][c]) > (am[p][c] < 0.0 ? -am[p][c] : am[p][c])) p = r;
      if ((am[p][c] < 0.0 ? -am[p][c] : am[p][c]) < 1e-12) sing = 1'b1;
      else begin
        if (p != c)
          for (int j = 0; j <= k; j++) begin t = am[c][j]; am[c][j] = am[p][j]; am[p][j] = t; end
        for (int r = c + 1; r < k; r++) begin
          f = am[r][c] / am[c][c];
          for (int j = c; j <= k; j++) am[r][j] = am[r][j] - f * am[c][j];
        end
      end
    end
    for (int r = k - 1; r >= 0; r--) begin
      t = am[r][k];
      for (int j = r + 1; j < k; j++) t = t - am[r][j] * yv[j];
      yv[r] = sing ? 0.0 : t / am[r][r];
    end
  endtask

  // The circuit topology the transmission gates form.
  always_comb begin
    if (tg_tia && !tg_fb_array)               topo = MODE_MVM;
    else if (tg_fb_array && !tg_second_stage) topo = MODE_INV;
    else if (tg_second_stage && tg_input)     topo = MODE_PINV;
    else                                      topo = MODE_EGV;
  end

  task automatic compute();
    real s, nrm;
    n_act = $countones(row_en);
    m_act = $countones(col_en);
    for (int j = 0; j < N; j++) begin
      xv[j] = (tg_input && (row_en[j] || col_en[j])) ? real'(comp_in[j]) : 0.0;
      yv[j] = 0.0;
    end
    unique case (topo)
      MODE_MVM: begin
        for (int i = 0; i < n_act; i++) begin
          s = 0.0;
          for (int j = 0; j < m_act; j++) s = s + g[i][j] * xv[j];
          yv[i] = s * MVM_GAIN;
        end
      end
      MODE_INV: begin
        for (int i = 0; i < n_act; i++) begin
          for (int j = 0; j < n_act; j++) am[i][j] = g[i][j];
          am[i][n_act] = xv[i];
        end
        solve_linear(n_act);
        for (int i = 0; i < n_act; i++) yv[i] = yv[i] * INV_GAIN;
      end
      MODE_PINV: begin
        for (int i = 0; i < m_act; i++) begin
          for (int k = 0; k < m_act; k++) begin
            s = 0.0;
            for (int r = 0; r < n_act; r++) s = s + g[r][i] * g[r][k];
            am[i][k] = s;
          end
          s = 0.0;
          for (int r = 0; r < n_act; r++) s = s + g[r][i] * xv[r];
          am[i][m_act] = s;
        end
        solve_linear(m_act);
        for (int i = 0; i < m_act; i++) yv[i] = yv[i] * INV_GAIN;
      end
      default: begin // MODE_EGV: the loop settles on the dominant eigenvector
        for (int i = 0; i < n_act; i++) xv[i] = 1.0;
        for (int it = 0; it < int'(EGV_ITERS); it++) begin
          nrm = 0.0;
          for (int i = 0; i < n_act; i++) begin
            s = 0.0;
            for (int j = 0; j < n_act; j++) s = s + g[i][j] * xv[j];
            yv[i] = s;
            nrm = nrm + s * s;
          end
          nrm = $sqrt(nrm);
          for (int i = 0; i < n_act; i++) xv[i] = (nrm > 0.0) ? yv[i] / nrm : 0.0;
        end
        for (int i = 0; i < n_act; i++) yv[i] = xv[i] * EGV_GAIN;
      end
    endcase
    for (int i = 0; i < N; i++) comp_out[i] <= adc(yv[i]);
  endtask

  initial begin
    void'($urandom(SEED));
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++)
        g[i][j] = GMIN + 5.0 * real'($urandom % 1000) / 1000.0;
    for (int i = 0; i < N; i++) comp_out[i] = '0;
  end

  // Device response to write pulses and verify reads.
  // Behavioural model: conductances are updated with blocking assignments so that the
  // clamping below sees the new value.
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pcnt       <= 0;
      pulse_done <= 1'b0;
      read_valid <= 1'b0;
      read_level <= '0;
    end else begin
      pulse_done <= 1'b0;
      read_valid <= read_en;
      if (read_en) read_level <= quantise(g[cell_row][cell_col]);
      if (pulse_en && pcnt == 0) begin
        if (pulse.set)
          g[cell_row][cell_col] = g[cell_row][cell_col] + SET_K * real'(int'(pulse.step) + 1) * VG_STEP * noise();
        else
          g[cell_row][cell_col] = g[cell_row][cell_col] - RST_K * real'(int'(pulse.step) + 1) * VSL_STEP * noise();
        if (g[cell_row][cell_col] > GMAX) g[cell_row][cell_col] = GMAX;
        if (g[cell_row][cell_col] < GMIN) g[cell_row][cell_col] = GMIN;
        pcnt       <= int'(PULSE_CYCLES) - 1;
        pulse_done <= (PULSE_CYCLES <= 1);
      end else if (pcnt == 1) begin
        pcnt       <= 0;
        pulse_done <= 1'b1;
      end else if (pcnt > 1) begin
        pcnt <= pcnt - 1;
      end
    end
  end

  // Reconfigured circuit settling.
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      scnt      <= 0;
      comp_busy <= 1'b0;
      comp_done <= 1'b0;
    end else begin
      comp_done <= 1'b0;
      if (comp_start && !comp_busy) begin
        compute();
        if (SETTLE_CYCLES <= 1) begin
          comp_done <= 1'b1;
        end else begin
          comp_busy <= 1'b1;
          scnt      <= int'(SETTLE_CYCLES) - 1;
        end
      end else if (comp_busy) begin
        if (scnt <= 1) begin
          comp_busy <= 1'b0;
          comp_done <= 1'b1;
        end else begin
          scnt <= scnt - 1;
        end
      end
    end
  end

  // Rules of use.
  a_one_pulse: assert property (@(posedge clk) disable iff (!rst_n) pulse_en |-> pcnt == 0);
  a_no_overlap: assert property (@(posedge clk) disable iff (!rst_n) comp_start |-> !comp_busy);
endmodule
