// reg_array: configuration register array of one AMC macro.
//
// "The configuration messages are stored in the register array in advance and will control
// the transmission gates (on or off), thus configuring the connections between memory and
// OPAs." The register holds the computing mode and the active region written by a CFG
// instruction, and decodes them into the switch controls of the macro:
//   row_en / col_en : rows and columns of the active region (drivers and array-to-OPA gates)
//   tg_tia          : OPA feedback through a resistor, array in the input path (MVM)
//   tg_fb_array     : array placed in the OPA feedback path (INV, PINV, EGV)
//   tg_second_stage : second stage / analog inverters in the loop (PINV, EGV)
//   tg_input        : DAC outputs connected to the array (all but EGV, which has no input)
// The grouping of switches into these three sets follows the usual AMC circuits for the four
// functions; the paper does not list the individual gates. The register updates one cycle
// after `we`; reset gives MVM on the full array.
module reg_array
  import gramc_pkg::*;
#(
  parameter int unsigned N = ARRAY_N
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       we,
  input  macro_cfg_t cfg_in,
  output macro_cfg_t cfg,
  output logic [N-1:0] row_en,
  output logic [N-1:0] col_en,
  output logic       tg_tia,
  output logic       tg_fb_array,
  output logic       tg_second_stage,
  output logic       tg_input
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg.mode <= MODE_MVM;
      cfg.rows <= 8'(N);
      cfg.cols <= 8'(N);
    end else if (we) begin
      cfg <= cfg_in;
    end
  end

  always_comb begin
    for (int i = 0; i < N; i++) begin
      row_en[i] = (i < int'(cfg.rows));
      col_en[i] = (i < int'(cfg.cols));
    end
    tg_tia          = (cfg.mode == MODE_MVM);
    tg_fb_array     = (cfg.mode != MODE_MVM);
    tg_second_stage = (cfg.mode == MODE_PINV) || (cfg.mode == MODE_EGV);
    tg_input        = (cfg.mode != MODE_EGV);
  end
endmodule
