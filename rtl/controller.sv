// controller: sequencer of the GRAMC digital control module.
//
// Runs the program held in the instruction stack. After `start` it clears the program
// counter, then for each instruction waits one cycle for the fetch, acts on the decoded
// instruction and advances the PC when the instruction has finished:
//   CFG   : writes mode and active region into the register array of the addressed macro
//           (1 cycle).
//   WV    : hands the addressed macro's active region to the write-verify sequencer, with the
//           ideal levels at global-buffer address `src`, and waits for it (write-verify path).
//   SOLVE : system solution path. Reads the input vector from the global buffer (one word per
//           cycle, one cycle latency) into the DAC input register, starts the macro, waits for
//           the circuit to settle, then writes the ADC results to the output buffer at `dst`,
//           one word per cycle. Vector lengths follow the macro's configuration: MVM reads
//           `cols` inputs and writes `rows` results, INV `rows` and `rows`, PINV `rows` and
//           `cols`, EGV no inputs and `rows` results.
//   FUNC  : starts the digital functional module and waits for it.
//   HALT  : ends the program (`done` pulses). An illegal instruction ends it with `error`.
// The paper describes the two data paths and the valid/ready control between the blocks but
// not the instruction set or the sequencing; both are this design's own. Each block is
// started with a one-cycle start pulse (valid) and reports completion with a done pulse
// (ready). The controller counts executed instructions per kind.
module controller
  import gramc_pkg::*;
#(
  parameter int unsigned N   = ARRAY_N,
  parameter int unsigned GAW = ADDR_W,
  parameter int unsigned OAW = 12
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  output logic                       busy,
  output logic                       done,
  output logic                       error,
  // program counter
  output logic                       pc_clear,
  output logic                       pc_advance,
  // decoded instruction
  input  logic                       dec_nop,
  input  logic                       dec_cfg,
  input  logic                       dec_wv,
  input  logic                       dec_solve,
  input  logic                       dec_func,
  input  logic                       dec_halt,
  input  logic                       dec_illegal,
  input  logic [3:0]                 dec_macro,
  input  macro_cfg_t                 dec_cfg_data,
  input  logic [7:0]                 dec_max_pulses,
  input  fop_e                       dec_fop,
  input  logic [ADDR_W-1:0]          dec_src,
  input  logic [ADDR_W-1:0]          dec_dst,
  input  logic [7:0]                 dec_len,
  // macro group
  output logic [3:0]                 sel,
  output logic                       cfg_we,
  output macro_cfg_t                 cfg_wdata,
  input  macro_cfg_t                 cfg_rdata,
  output logic                       comp_start,
  output logic signed [DAC_BITS-1:0] comp_in [N],
  input  logic                       comp_done,
  input  logic signed [ADC_BITS-1:0] comp_out [N],
  // write-verify sequencer
  output logic                       wv_start,
  output logic [7:0]                 wv_rows,
  output logic [7:0]                 wv_cols,
  output logic [GAW-1:0]             wv_base,
  output logic [7:0]                 wv_max_pulses,
  input  logic                       wv_done,
  // global buffer read port
  output logic [GAW-1:0]             gb_addr,
  input  logic [GBUF_W-1:0]          gb_data,
  // output buffer write port
  output logic                       ob_we,
  output logic [OAW-1:0]             ob_addr,
  output logic [DATA_W-1:0]          ob_data,
  // functional module
  output logic                       fu_start,
  output fop_e                       fu_op,
  output logic [OAW-1:0]             fu_src,
  output logic [OAW-1:0]             fu_dst,
  output logic [7:0]                 fu_len,
  input  logic                       fu_done,
  // statistics
  output logic [15:0]                n_instr,
  output logic [15:0]                n_wv,
  output logic [15:0]                n_func,
  output logic [15:0]                n_solve [4]   // per computing mode
);
  localparam int IW = $clog2(N);

  typedef enum logic [3:0] {
    C_IDLE, C_FETCH, C_EXEC, C_WV, C_LOAD, C_COMP, C_STORE, C_FUNC, C_NEXT
  } cstate_e;
  cstate_e state;

  logic [7:0]  n_in, n_out, cnt;
  logic [IW-1:0] ld_idx;
  logic        ld_vld;
  logic [ADDR_W-1:0] src_q;
  logic [OAW-1:0]    dst_q;

  // Vector lengths of a computation from the macro configuration.
  always_comb begin
    unique case (cfg_rdata.mode)
      MODE_MVM:  begin n_in = cfg_rdata.cols; n_out = cfg_rdata.rows; end
      MODE_INV:  begin n_in = cfg_rdata.rows; n_out = cfg_rdata.rows; end
      MODE_PINV: begin n_in = cfg_rdata.rows; n_out = cfg_rdata.cols; end
      default:   begin n_in = 8'd0;           n_out = cfg_rdata.rows; end
    endcase
  end

  // The PC moves in the cycle it is told to, so the stack output is valid after C_FETCH.
  assign pc_clear      = (state == C_IDLE) && start;
  assign pc_advance    = (state == C_NEXT);
  assign busy          = (state != C_IDLE);
  assign cfg_wdata     = dec_cfg_data;
  assign wv_rows       = cfg_rdata.rows;
  assign wv_cols       = cfg_rdata.cols;
  assign wv_base       = GAW'(dec_src);
  assign wv_max_pulses = dec_max_pulses;
  assign gb_addr       = GAW'(src_q) + GAW'(cnt);
  assign fu_op         = dec_fop;
  assign fu_src        = OAW'(dec_src);
  assign fu_dst        = OAW'(dec_dst);
  assign fu_len        = dec_len;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= C_IDLE;
      done       <= 1'b0;
      error      <= 1'b0;
      sel        <= '0;
      cfg_we     <= 1'b0;
      comp_start <= 1'b0;
      wv_start   <= 1'b0;
      fu_start   <= 1'b0;
      ob_we      <= 1'b0;
      ob_addr    <= '0;
      ob_data    <= '0;
      cnt        <= '0;
      ld_idx     <= '0;
      ld_vld     <= 1'b0;
      src_q      <= '0;
      dst_q      <= '0;
      n_instr    <= '0;
      n_wv       <= '0;
      n_func     <= '0;
      for (int i = 0; i < 4; i++) n_solve[i] <= '0;
      for (int i = 0; i < int'(N); i++) comp_in[i] <= '0;
    end else begin
      done       <= 1'b0;
      cfg_we     <= 1'b0;
      comp_start <= 1'b0;
      wv_start   <= 1'b0;
      fu_start   <= 1'b0;
      ob_we      <= 1'b0;
      ld_vld     <= 1'b0;
      unique case (state)
        C_IDLE: if (start) begin
          error    <= 1'b0;
          n_instr  <= '0;
          n_wv     <= '0;
          n_func   <= '0;
          for (int i = 0; i < 4; i++) n_solve[i] <= '0;
          state    <= C_FETCH;
        end
        // The instruction stack read takes one cycle after the PC changes.
        C_FETCH: state <= C_EXEC;
        C_EXEC: begin
          sel     <= dec_macro;
          src_q   <= dec_src;
          dst_q   <= OAW'(dec_dst);
          cnt     <= '0;
          n_instr <= n_instr + 16'd1;
          if (dec_illegal) begin
            error <= 1'b1;
            done  <= 1'b1;
            state <= C_IDLE;
          end else if (dec_halt) begin
            done  <= 1'b1;
            state <= C_IDLE;
          end else if (dec_cfg) begin
            cfg_we <= 1'b1;
            state  <= C_NEXT;
          end else if (dec_wv) begin
            wv_start <= 1'b1;
            n_wv     <= n_wv + 16'd1;
            state    <= C_WV;
          end else if (dec_solve) begin
            state <= C_LOAD;
          end else if (dec_func) begin
            fu_start <= 1'b1;
            n_func   <= n_func + 16'd1;
            state    <= C_FUNC;
          end else if (dec_nop) begin
            state <= C_NEXT;
          end else begin           // unreachable: the decoder flags unknown opcodes
            error <= 1'b1;
            done  <= 1'b1;
            state <= C_IDLE;
          end
        end
        C_WV:   if (wv_done) state <= C_NEXT;
        C_FUNC: if (fu_done) state <= C_NEXT;
        // Issue one global-buffer read per cycle; capture the word one cycle later.
        C_LOAD: begin
          if (cnt < n_in) begin
            ld_vld <= 1'b1;
            ld_idx <= cnt[IW-1:0];
            cnt    <= cnt + 8'd1;
          end else if (!ld_vld) begin
            comp_start <= 1'b1;
            cnt        <= '0;
            state      <= C_COMP;
          end
          if (ld_vld) comp_in[ld_idx] <= signed'(gb_data);
        end
        C_COMP: if (comp_done) begin
          n_solve[cfg_rdata.mode] <= n_solve[cfg_rdata.mode] + 16'd1;
          state <= C_STORE;
        end
        C_STORE: begin
          if (cnt < n_out) begin
            ob_we   <= 1'b1;
            ob_addr <= dst_q + OAW'(cnt);
            ob_data <= DATA_W'(comp_out[cnt[IW-1:0]]);
            cnt     <= cnt + 8'd1;
          end else begin
            state <= C_NEXT;
          end
        end
        C_NEXT: state <= C_FETCH;
        default: state <= C_IDLE;
      endcase
    end
  end
endmodule
