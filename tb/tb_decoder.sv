// tb_decoder: self-checking test of the instruction decoder.
// Random instructions; the expected decode and legality are computed here from the
// instruction format.
module tb_decoder;
  import gramc_pkg::*;
  instr_t instr;
  logic is_nop, is_cfg, is_wv, is_solve, is_func, is_halt, illegal;
  logic [3:0] macro;
  macro_cfg_t cfg;
  logic [7:0] wv_max_pulses, len;
  fop_e fop;
  logic [15:0] src, dst;
  int checks = 0, failures = 0;
  int n_illegal = 0;

  decoder dut (.instr, .is_nop, .is_cfg, .is_wv, .is_solve, .is_func, .is_halt, .illegal,
               .macro, .cfg, .wv_max_pulses, .fop, .src, .dst, .len);

  initial begin
    for (int i = 0; i < 5000; i++) begin
      logic [63:0] w;
      int op, rows, cols, md;
      bit legal, known;
      w = {$urandom, $urandom};
      op = $urandom % 6;
      w[63:60] = (op == 5) ? 4'(15) : (($urandom % 8 == 0) ? 4'(5 + $urandom % 10) : 4'(op));
      if ($urandom % 2) w[53:46] = 8'(1 + $urandom % 128);
      if ($urandom % 2) w[45:38] = 8'(1 + $urandom % 128);
      instr = instr_t'(w);
      #1;
      rows = int'(w[53:46]); cols = int'(w[45:38]); md = int'(w[55:54]);
      known = (w[63:60] <= 4) || (w[63:60] == 15);
      legal = known;
      if ((w[63:60] inside {4'd1, 4'd2, 4'd3}) && w[59:56] >= 16) legal = 0;
      if (w[63:60] == 1) begin
        if (rows == 0 || cols == 0 || rows > 128 || cols > 128) legal = 0;
        if ((md == 1 || md == 3) && rows != cols) legal = 0;
        if (md == 2 && rows < cols) legal = 0;
      end
      if (w[63:60] == 4 && rows == 0) legal = 0;
      checks++;
      if (illegal != !legal) begin failures++; $display("legality %h", w); end
      if (!legal) n_illegal++;
      checks++;
      if (is_nop != (w[63:60] == 0) || is_cfg != (w[63:60] == 1) || is_wv != (w[63:60] == 2) ||
          is_solve != (w[63:60] == 3) || is_func != (w[63:60] == 4) || is_halt != (w[63:60] == 15)) begin
        failures++; $display("op decode %h", w);
      end
      checks++;
      if (macro != w[59:56] || cfg.mode != mode_e'(w[55:54]) || cfg.rows != w[53:46] ||
          cfg.cols != w[45:38] || src != w[37:22] || dst != w[21:6] || fop != fop_e'(w[5:3]) ||
          len != w[53:46] || wv_max_pulses != ((w[13:6] == 0) ? 8'd64 : w[13:6])) begin
        failures++; $display("fields %h", w);
      end
    end
    checks++;
    if (n_illegal == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
