// tb_controller: self-checking test of the GRAMC controller.
// The controller runs with the real program counter and decoder; everything it commands is
// modelled here: an instruction memory, per-macro configuration registers, a computation
// responder (result i = 3 * input i + macro, after 3 cycles), write-verify and functional
// module responders that check the operands they receive, a global buffer whose word at
// address a is a pattern of a, and an output buffer that records writes. A program of every
// instruction kind and all four modes is run; afterwards the output buffer, the per-kind
// counters and the vector lengths are checked. A second program must stop with `error` on
// an illegal instruction.
module tb_controller;
  import gramc_pkg::*;
  localparam int N = 16;
  logic clk = 0, rst_n = 0, start = 0;
  logic busy, done, error, pc_clear, pc_advance;
  logic [7:0] pc;
  instr_t instr;
  instr_t prog [64];
  logic d_nop, d_cfg, d_wv, d_solve, d_func, d_halt, d_illegal;
  logic [3:0] d_macro;
  macro_cfg_t d_cfgdata, cfg_wdata, cfg_rdata;
  logic [7:0] d_maxp, d_len;
  fop_e d_fop;
  logic [15:0] d_src, d_dst;
  logic [3:0] sel;
  logic cfg_we, comp_start, comp_done, wv_start, wv_done, fu_start, fu_done, ob_we;
  logic signed [7:0]  comp_in  [N];
  logic signed [11:0] comp_out [N];
  logic [7:0] wv_rows, wv_cols, wv_maxp, fu_len;
  logic [15:0] wv_base, gb_addr;
  logic [7:0] gb_data;
  logic [11:0] ob_addr, fu_src, fu_dst;
  logic [15:0] ob_data;
  fop_e fu_op;
  logic [15:0] n_instr, n_wv, n_func;
  logic [15:0] n_solve [4];
  macro_cfg_t mcfg [16];
  logic [15:0] obuf [4096];
  int checks = 0, failures = 0;
  int cdly, wdly, fdly, n_gb_reads;

  prog_counter #(.AW(8)) u_pc (.clk, .rst_n, .clear(pc_clear), .advance(pc_advance), .pc);
  always_ff @(posedge clk) instr <= prog[pc[5:0]];
  decoder #(.N_ARR(N)) u_dec (.instr, .is_nop(d_nop), .is_cfg(d_cfg), .is_wv(d_wv),
    .is_solve(d_solve), .is_func(d_func), .is_halt(d_halt), .illegal(d_illegal), .macro(d_macro),
    .cfg(d_cfgdata), .wv_max_pulses(d_maxp), .fop(d_fop), .src(d_src), .dst(d_dst), .len(d_len));

  controller #(.N(N), .GAW(16), .OAW(12)) dut (.clk, .rst_n, .start, .busy, .done, .error,
    .pc_clear, .pc_advance, .dec_nop(d_nop), .dec_cfg(d_cfg), .dec_wv(d_wv), .dec_solve(d_solve),
    .dec_func(d_func), .dec_halt(d_halt), .dec_illegal(d_illegal), .dec_macro(d_macro),
    .dec_cfg_data(d_cfgdata), .dec_max_pulses(d_maxp), .dec_fop(d_fop), .dec_src(d_src),
    .dec_dst(d_dst), .dec_len(d_len), .sel, .cfg_we, .cfg_wdata, .cfg_rdata, .comp_start,
    .comp_in, .comp_done, .comp_out, .wv_start, .wv_rows, .wv_cols, .wv_base,
    .wv_max_pulses(wv_maxp), .wv_done, .gb_addr, .gb_data, .ob_we, .ob_addr, .ob_data,
    .fu_start, .fu_op, .fu_src, .fu_dst, .fu_len, .fu_done, .n_instr, .n_wv, .n_func, .n_solve);

  function automatic logic [7:0] gpat(logic [15:0] a);
    return 8'(a * 7 + 3);
  endfunction

  function automatic instr_t mk(opcode_e op, int m, mode_e md, int r, int c, int s, int d, fop_e f);
    instr_t i;
    i.op = op; i.macro = 4'(m); i.mode = md; i.rows = 8'(r); i.cols = 8'(c);
    i.src = 16'(s); i.dst = 16'(d); i.fop = f; i.rsvd = '0;
    return i;
  endfunction

  assign cfg_rdata = mcfg[sel];
  always #5 clk = ~clk;

  // Responders.
  always_ff @(posedge clk) begin
    gb_data <= gpat(gb_addr);
    if (cfg_we) mcfg[sel] <= cfg_wdata;
    if (ob_we)  obuf[ob_addr] <= ob_data;
  end

  always @(posedge clk) begin
    comp_done <= 1'b0;
    wv_done   <= 1'b0;
    fu_done   <= 1'b0;
    if (!rst_n) begin cdly = 0; wdly = 0; fdly = 0; end
    else if (comp_start) cdly = 3;
    else if (cdly > 0) begin
      cdly--;
      if (cdly == 0) begin
        comp_done <= 1'b1;
        for (int i = 0; i < N; i++) comp_out[i] <= 12'(3 * int'(comp_in[i]) + int'(sel));
      end
    end
    if (rst_n && wv_start) begin
      wdly = 5;
      checks++;
      if (wv_rows != mcfg[sel].rows || wv_cols != mcfg[sel].cols || wv_base != 16'd500 || wv_maxp != 8'd64) begin
        failures++; $display("wv operands %0d %0d %0d %0d", wv_rows, wv_cols, wv_base, wv_maxp);
      end
    end else if (wdly > 0) begin
      wdly--;
      if (wdly == 0) wv_done <= 1'b1;
    end
    if (rst_n && fu_start) begin
      fdly = 4;
      checks++;
      if (fu_op != FOP_MAXP || fu_src != 12'd100 || fu_dst != 12'd900 || fu_len != 8'd8) begin
        failures++; $display("fu operands %0d %0d %0d %0d", fu_op, fu_src, fu_dst, fu_len);
      end
    end else if (fdly > 0) begin
      fdly--;
      if (fdly == 0) fu_done <= 1'b1;
    end
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_prog();
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    while (!done) @(negedge clk);
  endtask

  // Expected output of a solve whose input i was read from address src + i.
  function automatic logic [15:0] expo(int src, int i, int nin, int m);
    int x;
    x = (i < nin) ? int'($signed(gpat(16'(src + i)))) : 0;
    return 16'($signed(12'(3 * x + m)));
  endfunction

  initial begin
    for (int i = 0; i < 16; i++) mcfg[i] = '0;
    for (int i = 0; i < 4096; i++) obuf[i] = 16'hdead;
    for (int i = 0; i < 64; i++) prog[i] = mk(OP_HALT, 0, MODE_MVM, 1, 1, 0, 0, FOP_RELU);
    cdly = 0; wdly = 0; fdly = 0;
    prog[0] = mk(OP_CFG,   2, MODE_MVM,  12, 9, 0, 0, FOP_RELU);
    prog[1] = mk(OP_WV,    2, MODE_MVM,   1, 1, 500, 0, FOP_RELU);
    prog[2] = mk(OP_SOLVE, 2, MODE_MVM,   1, 1, 10, 100, FOP_RELU);
    prog[3] = mk(OP_NOP,   0, MODE_MVM,   1, 1, 0, 0, FOP_RELU);
    prog[4] = mk(OP_CFG,   5, MODE_INV,  16, 16, 0, 0, FOP_RELU);
    prog[5] = mk(OP_SOLVE, 5, MODE_MVM,   1, 1, 40, 200, FOP_RELU);
    prog[6] = mk(OP_CFG,   7, MODE_PINV, 10, 3, 0, 0, FOP_RELU);
    prog[7] = mk(OP_SOLVE, 7, MODE_MVM,   1, 1, 70, 300, FOP_RELU);
    prog[8] = mk(OP_CFG,   9, MODE_EGV,   6, 6, 0, 0, FOP_RELU);
    prog[9] = mk(OP_SOLVE, 9, MODE_MVM,   1, 1, 0, 400, FOP_RELU);
    prog[10] = mk(OP_FUNC, 0, MODE_MVM,   8, 1, 100, 900, FOP_MAXP);
    prog[11] = mk(OP_HALT, 0, MODE_MVM,   1, 1, 0, 0, FOP_RELU);
    repeat (2) @(negedge clk);
    rst_n = 1;
    run_prog();
    checks++;
    if (error || n_instr != 12 || n_wv != 1 || n_func != 1 ||
        n_solve[0] != 1 || n_solve[1] != 1 || n_solve[2] != 1 || n_solve[3] != 1) begin
      failures++; $display("counters instr=%0d wv=%0d func=%0d", n_instr, n_wv, n_func);
    end
    // MVM, macro 2: 9 inputs from 10, 12 outputs to 100
    for (int i = 0; i < 13; i++) begin
      checks++;
      if (obuf[100 + i] != ((i < 12) ? expo(10, i, 9, 2) : 16'hdead)) begin failures++; $display("mvm %0d %h", i, obuf[100+i]); end
    end
    // INV, macro 5: 16 inputs, 16 outputs
    for (int i = 0; i < 16; i++) begin
      checks++;
      if (obuf[200 + i] != expo(40, i, 16, 5)) begin failures++; $display("inv %0d", i); end
    end
    // PINV, macro 7: 10 inputs (input 3..9 unused by the model but loaded), 3 outputs
    for (int i = 0; i < 4; i++) begin
      checks++;
      if (obuf[300 + i] != ((i < 3) ? expo(70, i, 10, 7) : 16'hdead)) begin failures++; $display("pinv %0d", i); end
    end
    // EGV, macro 9: no input loaded (inputs keep the values of the last load), 6 outputs
    for (int i = 0; i < 7; i++) begin
      checks++;
      if (obuf[400 + i] != ((i < 6) ? expo(70, i, 10, 9) : 16'hdead)) begin failures++; $display("egv %0d", i); end
    end
    // Illegal instruction: a CFG region of 200 rows does not fit the array.
    prog[0] = mk(OP_NOP, 0, MODE_MVM, 1, 1, 0, 0, FOP_RELU);
    prog[1] = mk(OP_CFG, 3, MODE_MVM, 200, 4, 0, 0, FOP_RELU);
    run_prog();
    checks++;
    if (!error || n_instr != 2) begin failures++; $display("illegal not caught"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
