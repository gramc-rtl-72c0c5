// gramc_top: GRAMC, a general-purpose reconfigurable analog matrix computing system.
//
// A digital control module drives a group of AMC macros, each a 128 x 128 RRAM array whose
// connections to a column of amplifiers are set by a register array, so that the same
// hardware computes a matrix-vector product (MVM), solves a linear system (INV), a least
// squares problem (PINV) or finds an eigenvector (EGV) in one analog step. The digital part
// follows the system figure of the paper: program counter, instruction stack, decoder,
// controller, global buffer, output buffer, comparison unit inside the write-verify
// sequencer, and a digital functional module. Two data paths share the macros:
//   write-verify   : global buffer (ideal levels) -> wv_ctrl/CU -> pulses into the array,
//                    read back through the ADC, repeated until in range or out of pulses;
//   system solution: global buffer (inputs) -> DACs -> reconfigured array -> ADCs ->
//                    output buffer -> functional module (activation, pooling, bit slicing).
// Host interface: load the instruction stack and the global buffer while idle, pulse
// `start`, wait for `done` (with `error` for an illegal instruction), then read the output
// buffer through the host read port (data one cycle after the address). Status counters
// report the last write-verify run and the instructions executed.
// The instruction set, buffer sizes and handshakes are this design's choices; the paper gives
// the block structure, the data paths, the 16 macros and the 128 x 128 array size.
module gramc_top
  import gramc_pkg::*;
#(
  parameter int unsigned N_MAC    = N_MACROS,
  parameter int unsigned N        = ARRAY_N,
  parameter int unsigned IS_DEPTH = 256,
  parameter int unsigned GB_DEPTH = 65536,
  parameter int unsigned OB_DEPTH = 4096,
  parameter int unsigned WV_TOL   = 0       // error range of write-verify, in levels
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // host: program and data loading
  input  logic                        is_ld_en,
  input  logic [$clog2(IS_DEPTH)-1:0] is_ld_addr,
  input  instr_t                      is_ld_data,
  input  logic                        gb_wr_en,
  input  logic [$clog2(GB_DEPTH)-1:0] gb_wr_addr,
  input  logic [GBUF_W-1:0]           gb_wr_data,
  input  logic [$clog2(OB_DEPTH)-1:0] ob_rd_addr,
  output logic [DATA_W-1:0]           ob_rd_data,
  // run control
  input  logic                        start,
  output logic                        busy,
  output logic                        done,
  output logic                        error,
  // status
  output logic [15:0]                 wv_n_ok,
  output logic [15:0]                 wv_n_fail,
  output logic [31:0]                 wv_n_set,
  output logic [31:0]                 wv_n_reset,
  output logic [15:0]                 n_instr,
  output logic [15:0]                 n_wv,
  output logic [15:0]                 n_func,
  output logic [15:0]                 n_solve [4],
  output logic [15:0]                 fu_sat_count,
  output logic [2:0]                  cu_flags      // CU flag register {A>B, A=B, A<B}
);
  localparam int unsigned ISAW = $clog2(IS_DEPTH);
  localparam int unsigned GAW  = $clog2(GB_DEPTH);
  localparam int unsigned OAW  = $clog2(OB_DEPTH);
  localparam int unsigned IW   = $clog2(N);

  // ---------------- program counter, instruction stack, decoder ----------------
  logic [ISAW-1:0] pc;
  logic            pc_clear, pc_advance;
  instr_t          instr;

  prog_counter #(.AW(ISAW)) u_pc (.clk, .rst_n, .clear(pc_clear), .advance(pc_advance), .pc);

  instr_stack #(.DEPTH(IS_DEPTH)) u_is (
    .clk, .ld_en(is_ld_en), .ld_addr(is_ld_addr), .ld_data(is_ld_data),
    .rd_addr(pc), .rd_data(instr)
  );

  logic d_nop, d_cfg, d_wv, d_solve, d_func, d_halt, d_illegal;
  logic [3:0] d_macro;
  macro_cfg_t d_cfgdata;
  logic [7:0] d_maxp, d_len;
  fop_e       d_fop;
  logic [ADDR_W-1:0] d_src, d_dst;

  decoder #(.N_MAC(N_MAC), .N_ARR(N)) u_dec (
    .instr, .is_nop(d_nop), .is_cfg(d_cfg), .is_wv(d_wv), .is_solve(d_solve),
    .is_func(d_func), .is_halt(d_halt), .illegal(d_illegal), .macro(d_macro),
    .cfg(d_cfgdata), .wv_max_pulses(d_maxp), .fop(d_fop), .src(d_src), .dst(d_dst), .len(d_len)
  );

  // ---------------- controller ----------------
  logic [3:0]  sel;
  logic        cfg_we;
  macro_cfg_t  cfg_wdata, cfg_rdata;
  logic        comp_start, comp_busy, comp_done;
  logic signed [DAC_BITS-1:0] comp_in  [N];
  logic signed [ADC_BITS-1:0] comp_out [N];
  logic        wv_start, wv_busy, wv_done;
  logic [7:0]  wv_rows, wv_cols, wv_maxp;
  logic [GAW-1:0] wv_base, c_gb_addr, w_gb_addr, gb_rd_addr;
  logic [GBUF_W-1:0] gb_rd_data;
  logic        c_ob_we, f_ob_we, ob_we;
  logic [OAW-1:0] c_ob_addr, f_ob_addr, ob_wr_addr;
  logic [DATA_W-1:0] c_ob_data, f_ob_data, ob_wr_data;
  logic        fu_start, fu_busy, fu_done;
  fop_e        fu_op;
  logic [OAW-1:0] fu_src, fu_dst, fu_ra, fu_rb;
  logic [7:0]  fu_len;
  logic [DATA_W-1:0] fu_da, fu_db;

  controller #(.N(N), .GAW(GAW), .OAW(OAW)) u_ctrl (
    .clk, .rst_n, .start, .busy, .done, .error,
    .pc_clear, .pc_advance,
    .dec_nop(d_nop), .dec_cfg(d_cfg), .dec_wv(d_wv), .dec_solve(d_solve), .dec_func(d_func),
    .dec_halt(d_halt), .dec_illegal(d_illegal), .dec_macro(d_macro), .dec_cfg_data(d_cfgdata),
    .dec_max_pulses(d_maxp), .dec_fop(d_fop), .dec_src(d_src), .dec_dst(d_dst), .dec_len(d_len),
    .sel, .cfg_we, .cfg_wdata, .cfg_rdata, .comp_start, .comp_in, .comp_done, .comp_out,
    .wv_start, .wv_rows, .wv_cols, .wv_base, .wv_max_pulses(wv_maxp), .wv_done,
    .gb_addr(c_gb_addr), .gb_data(gb_rd_data),
    .ob_we(c_ob_we), .ob_addr(c_ob_addr), .ob_data(c_ob_data),
    .fu_start, .fu_op, .fu_src, .fu_dst, .fu_len, .fu_done,
    .n_instr, .n_wv, .n_func, .n_solve
  );

  // ---------------- buffers ----------------
  assign gb_rd_addr = wv_busy ? w_gb_addr : c_gb_addr;

  global_buffer #(.DEPTH(GB_DEPTH)) u_gb (
    .clk, .wr_en(gb_wr_en), .wr_addr(gb_wr_addr), .wr_data(gb_wr_data),
    .rd_addr(gb_rd_addr), .rd_data(gb_rd_data)
  );

  // The functional module's last write is driven in the cycle its busy flag falls, so the
  // write port is granted on its write enable, not on busy.
  assign ob_we      = f_ob_we | c_ob_we;
  assign ob_wr_addr = f_ob_we ? f_ob_addr : c_ob_addr;
  assign ob_wr_data = f_ob_we ? f_ob_data : c_ob_data;

  output_buffer #(.DEPTH(OB_DEPTH)) u_ob (
    .clk, .wr_en(ob_we), .wr_addr(ob_wr_addr), .wr_data(ob_wr_data),
    .rd_addr_a(fu_ra), .rd_data_a(fu_da), .rd_addr_b(fu_rb), .rd_data_b(fu_db),
    .rd_addr_h(ob_rd_addr), .rd_data_h(ob_rd_data)
  );

  // ---------------- write-verify path ----------------
  logic [IW-1:0] cell_row, cell_col;
  logic          read_en, read_valid, pulse_en, pulse_done;
  logic [LEVEL_BITS-1:0] read_level;
  pulse_t        pulse;
  logic          cu_gt, cu_eq, cu_lt;

  assign cu_flags = {cu_gt, cu_eq, cu_lt};

  wv_ctrl #(.N(N), .GAW(GAW)) u_wv (
    .clk, .rst_n, .start(wv_start), .rows(wv_rows), .cols(wv_cols), .base(wv_base),
    .max_pulses(wv_maxp), .tol(LEVEL_BITS'(WV_TOL)), .busy(wv_busy), .done(wv_done),
    .gb_addr(w_gb_addr), .gb_data(gb_rd_data),
    .cell_row, .cell_col, .read_en, .read_valid, .read_level, .pulse_en, .pulse, .pulse_done,
    .n_ok(wv_n_ok), .n_fail(wv_n_fail), .n_set(wv_n_set), .n_reset(wv_n_reset),
    .flag_gt(cu_gt), .flag_eq(cu_eq), .flag_lt(cu_lt)
  );

  // ---------------- AMC macro group ----------------
  macro_group #(.N_MAC(N_MAC), .N(N)) u_mg (
    .clk, .rst_n, .sel, .cfg_we, .cfg_in(cfg_wdata), .cfg_out(cfg_rdata),
    .cell_row, .cell_col, .pulse_en, .pulse, .pulse_done, .read_en, .read_valid, .read_level,
    .comp_start, .comp_in, .comp_busy, .comp_done, .comp_out
  );

  // ---------------- digital functional module ----------------
  func_unit #(.AW(OAW)) u_fu (
    .clk, .rst_n, .start(fu_start), .op(fu_op), .src(fu_src), .dst(fu_dst), .len(fu_len),
    .busy(fu_busy), .done(fu_done),
    .rd_addr_a(fu_ra), .rd_data_a(fu_da), .rd_addr_b(fu_rb), .rd_data_b(fu_db),
    .wr_en(f_ob_we), .wr_addr(f_ob_addr), .wr_data(f_ob_data), .sat_count(fu_sat_count)
  );

  // The two data paths never use the macros at the same time, and the controller never
  // writes the output buffer while the functional module does.
  a_ob_single_writer: assert property (@(posedge clk) disable iff (!rst_n) !(f_ob_we && c_ob_we));
  a_paths_exclusive: assert property (@(posedge clk) disable iff (!rst_n)
                                      !(wv_busy && (comp_busy || fu_busy)));
endmodule
