// macro_group: the group of AMC macros of GRAMC ("a group of 16 AMC macros").
//
// Holds N_MAC amc_macro instances and routes the single shared control interface to the
// macro selected by `sel`: configuration writes, cell reads and write pulses, and
// computations are enabled only in the selected macro, and its results, configuration and
// status are returned. Every macro keeps its own array contents and configuration, so
// matrices stay resident in their arrays between operations (for example the two arrays
// holding the upper and lower 4 bits of an 8-bit weight matrix). The selection is
// combinational; `sel` must stay stable while an operation on a macro is in progress.
// The paper gives the macro count; the one-macro-at-a-time shared interface is this
// design's choice (the paper does not describe concurrent operation of several macros).
module macro_group
  import gramc_pkg::*;
#(
  parameter int unsigned N_MAC = N_MACROS,
  parameter int unsigned N     = ARRAY_N
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [3:0]                  sel,
  input  logic                        cfg_we,
  input  macro_cfg_t                  cfg_in,
  output macro_cfg_t                  cfg_out,
  input  logic [$clog2(N)-1:0]        cell_row,
  input  logic [$clog2(N)-1:0]        cell_col,
  input  logic                        pulse_en,
  input  pulse_t                      pulse,
  output logic                        pulse_done,
  input  logic                        read_en,
  output logic                        read_valid,
  output logic [LEVEL_BITS-1:0]       read_level,
  input  logic                        comp_start,
  input  logic signed [DAC_BITS-1:0]  comp_in  [N],
  output logic                        comp_busy,
  output logic                        comp_done,
  output logic signed [ADC_BITS-1:0]  comp_out [N]
);
  macro_cfg_t                 m_cfg        [N_MAC];
  logic                       m_pulse_done [N_MAC];
  logic                       m_read_valid [N_MAC];
  logic [LEVEL_BITS-1:0]      m_read_level [N_MAC];
  logic                       m_comp_busy  [N_MAC];
  logic                       m_comp_done  [N_MAC];
  logic signed [ADC_BITS-1:0] m_comp_out   [N_MAC][N];

  for (genvar k = 0; k < N_MAC; k++) begin : g_mac
    logic hit;
    assign hit = (sel == 4'(k));
    amc_macro #(.N(N), .SEED(k + 1)) u_mac (
      .clk, .rst_n,
      .cfg_we(cfg_we && hit), .cfg_in, .cfg_out(m_cfg[k]),
      .cell_row, .cell_col,
      .pulse_en(pulse_en && hit), .pulse, .pulse_done(m_pulse_done[k]),
      .read_en(read_en && hit), .read_valid(m_read_valid[k]), .read_level(m_read_level[k]),
      .comp_start(comp_start && hit), .comp_in,
      .comp_busy(m_comp_busy[k]), .comp_done(m_comp_done[k]), .comp_out(m_comp_out[k])
    );
  end

  always_comb begin
    cfg_out    = m_cfg[0];
    pulse_done = 1'b0;
    read_valid = 1'b0;
    read_level = '0;
    comp_busy  = 1'b0;
    comp_done  = 1'b0;
    for (int i = 0; i < int'(N); i++) comp_out[i] = '0;
    for (int k = 0; k < int'(N_MAC); k++) begin
      if (sel == 4'(k)) begin
        cfg_out    = m_cfg[k];
        pulse_done = m_pulse_done[k];
        read_valid = m_read_valid[k];
        read_level = m_read_level[k];
        comp_busy  = m_comp_busy[k];
        comp_done  = m_comp_done[k];
        for (int i = 0; i < int'(N); i++) comp_out[i] = m_comp_out[k][i];
      end
    end
  end
endmodule
