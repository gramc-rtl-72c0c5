// wv_ctrl: on-chip write-verify sequencer of GRAMC.
//
// Programs the active region (rows x cols, top-left corner) of one RRAM array to the ideal
// 4-bit levels held in the global buffer, row-major from address `base`. For each cell it
// repeats: verify read through the ADC, comparison in the comparison unit (CU) against the
// ideal level, and, if the level is outside the error range, one SET or RESET pulse with a
// stepped amplitude. A cell is finished when it is within `tol` levels or when its pulse count
// reaches `max_pulses`, as the paper describes ("Until all the conductance states satisfy the
// error range or write pulse number is larger than the maximum pulse number"). Cells are
// programmed one at a time; the paper does not say whether cells are handled serially or in
// parallel, and this design takes the simplest choice.
// Interface: pulse `start` with the region and limits; `busy` stays high until `done` pulses.
// Per cell it costs 2 cycles to fetch the ideal level, then per verify loop 1 read cycle,
// 1 read-latency cycle, 1 CU cycle and, if a pulse is needed, 1 + the macro's pulse time.
// Counters report cells that passed and failed and the SET and RESET pulses applied.
// An ideal level occupies the low 4 bits of a global-buffer word; the upper bits are unused.
module wv_ctrl
  import gramc_pkg::*;
#(
  parameter int unsigned N   = ARRAY_N,
  parameter int unsigned GAW = ADDR_W
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic [7:0]            rows,
  input  logic [7:0]            cols,
  input  logic [GAW-1:0]        base,
  input  logic [7:0]            max_pulses,
  input  logic [LEVEL_BITS-1:0] tol,
  output logic                  busy,
  output logic                  done,
  // global buffer read port (ideal levels)
  output logic [GAW-1:0]        gb_addr,
  input  logic [GBUF_W-1:0]     gb_data,
  // macro cell access
  output logic [$clog2(N)-1:0]  cell_row,
  output logic [$clog2(N)-1:0]  cell_col,
  output logic                  read_en,
  input  logic                  read_valid,
  input  logic [LEVEL_BITS-1:0] read_level,
  output logic                  pulse_en,
  output pulse_t                pulse,
  input  logic                  pulse_done,
  // statistics of the last run
  output logic [15:0]           n_ok,
  output logic [15:0]           n_fail,
  output logic [31:0]           n_set,
  output logic [31:0]           n_reset,
  output logic                  flag_gt,
  output logic                  flag_eq,
  output logic                  flag_lt
);
  typedef enum logic [2:0] {S_IDLE, S_FETCH, S_TGT, S_READ, S_RWAIT, S_CU, S_PWAIT} state_e;
  state_e state;

  logic [7:0]            rows_q, cols_q, maxp_q, r, c;
  logic [LEVEL_BITS-1:0] tol_q, target;
  logic [GAW-1:0]        off;
  logic                  first;
  logic                  cu_valid, res_valid, res_ok, res_fail, res_pulse;
  pulse_t                cu_pulse;
  logic                  last_cell;

  comparison_unit u_cu (
    .clk, .rst_n, .valid(cu_valid), .first, .a(read_level), .b(target), .tol(tol_q),
    .max_pulses(maxp_q), .res_valid, .res_ok, .res_fail, .res_pulse, .pulse(cu_pulse),
    .flag_gt, .flag_eq, .flag_lt
  );

  assign gb_addr   = base + off;
  assign cell_row  = r[$clog2(N)-1:0];
  assign cell_col  = c[$clog2(N)-1:0];
  assign busy      = (state != S_IDLE);
  assign read_en   = (state == S_READ);
  assign cu_valid  = (state == S_RWAIT) && read_valid;
  assign last_cell = (r == rows_q - 8'd1) && (c == cols_q - 8'd1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      rows_q   <= '0;
      cols_q   <= '0;
      maxp_q   <= '0;
      tol_q    <= '0;
      target   <= '0;
      off      <= '0;
      r        <= '0;
      c        <= '0;
      first    <= 1'b0;
      done     <= 1'b0;
      pulse_en <= 1'b0;
      pulse    <= '0;
      n_ok     <= '0;
      n_fail   <= '0;
      n_set    <= '0;
      n_reset  <= '0;
    end else begin
      done     <= 1'b0;
      pulse_en <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          rows_q  <= rows;
          cols_q  <= cols;
          maxp_q  <= max_pulses;
          tol_q   <= tol;
          off     <= '0;
          r       <= '0;
          c       <= '0;
          n_ok    <= '0;
          n_fail  <= '0;
          n_set   <= '0;
          n_reset <= '0;
          state   <= S_FETCH;
        end
        S_FETCH: state <= S_TGT;
        S_TGT: begin
          target <= gb_data[LEVEL_BITS-1:0];
          first  <= 1'b1;
          state  <= S_READ;
        end
        S_READ:  state <= S_RWAIT;
        S_RWAIT: if (read_valid) begin
          first <= 1'b0;
          state <= S_CU;
        end
        S_CU: if (res_valid) begin
          if (res_pulse) begin
            pulse_en <= 1'b1;
            pulse    <= cu_pulse;
            if (cu_pulse.set) n_set   <= n_set + 32'd1;
            else              n_reset <= n_reset + 32'd1;
            state    <= S_PWAIT;
          end else begin
            if (res_ok)   n_ok   <= n_ok + 16'd1;
            if (res_fail) n_fail <= n_fail + 16'd1;
            if (last_cell) begin
              done  <= 1'b1;
              state <= S_IDLE;
            end else begin
              off   <= off + 1'b1;
              if (c == cols_q - 8'd1) begin
                c <= '0;
                r <= r + 8'd1;
              end else begin
                c <= c + 8'd1;
              end
              state <= S_FETCH;
            end
          end
        end
        S_PWAIT: if (pulse_done) state <= S_READ;
        default: state <= S_IDLE;
      endcase
    end
  end

  // A pulse is only requested with a valid CU decision.
  a_pulse_from_cu: assert property (@(posedge clk) disable iff (!rst_n)
                                    pulse_en |-> $past(state == S_CU && res_valid && res_pulse));
endmodule
