// decoder: instruction decoder of the GRAMC digital control module.
//
// Splits a fetched 64-bit instruction into the controls of the two data paths the paper
// describes, write-verify and system solution, plus the configuration write and the
// digital functional module. It also checks the operands against the hardware (macro index,
// active region inside the 128 x 128 array, region shape required by the computing mode)
// and flags an illegal instruction. Purely combinational. Bits [2:0] of the instruction are
// reserved and ignored.
// The paper names the decoder and its two data paths; the instruction format and the
// legality rules are this design's own.
module decoder
  import gramc_pkg::*;
#(
  parameter int unsigned N_MAC = N_MACROS,
  parameter int unsigned N_ARR = ARRAY_N
) (
  input  instr_t     instr,
  output logic       is_nop,
  output logic       is_cfg,      // write register array of `macro`
  output logic       is_wv,       // write-verify path
  output logic       is_solve,    // system solution path
  output logic       is_func,     // digital functional module
  output logic       is_halt,
  output logic       illegal,
  output logic [3:0] macro,
  output macro_cfg_t cfg,         // configuration carried by a CFG instruction
  output logic [7:0] wv_max_pulses,
  output fop_e       fop,
  output logic [ADDR_W-1:0] src,
  output logic [ADDR_W-1:0] dst,
  output logic [7:0] len          // element count of a FUNC instruction
);
  logic region_ok, shape_ok;

  always_comb begin
    is_nop   = 1'b0;
    is_cfg   = 1'b0;
    is_wv    = 1'b0;
    is_solve = 1'b0;
    is_func  = 1'b0;
    is_halt  = 1'b0;
    unique case (instr.op)
      OP_NOP:   is_nop   = 1'b1;
      OP_CFG:   is_cfg   = 1'b1;
      OP_WV:    is_wv    = 1'b1;
      OP_SOLVE: is_solve = 1'b1;
      OP_FUNC:  is_func  = 1'b1;
      OP_HALT:  is_halt  = 1'b1;
      default:  ;
    endcase

    macro         = instr.macro;
    cfg.mode      = instr.mode;
    cfg.rows      = instr.rows;
    cfg.cols      = instr.cols;
    wv_max_pulses = (instr.dst[7:0] == 8'd0) ? 8'(MAX_PULSES) : instr.dst[7:0];
    fop           = instr.fop;
    src           = instr.src;
    dst           = instr.dst;
    len           = instr.rows;

    // Active region must lie inside the array.
    region_ok = (instr.rows != 8'd0) && (instr.cols != 8'd0) &&
                (32'(instr.rows) <= N_ARR) && (32'(instr.cols) <= N_ARR);
    // INV and EGV need a square matrix, PINV a tall one (rows >= cols).
    unique case (instr.mode)
      MODE_INV, MODE_EGV: shape_ok = (instr.rows == instr.cols);
      MODE_PINV:          shape_ok = (instr.rows >= instr.cols);
      default:            shape_ok = 1'b1;
    endcase

    illegal = 1'b0;
    if (!(is_nop || is_cfg || is_wv || is_solve || is_func || is_halt)) illegal = 1'b1;
    if ((is_cfg || is_wv || is_solve) && (32'(instr.macro) >= N_MAC))    illegal = 1'b1;
    if (is_cfg && !(region_ok && shape_ok))                              illegal = 1'b1;
    if (is_func && (instr.rows == 8'd0))                                 illegal = 1'b1;
  end
endmodule
