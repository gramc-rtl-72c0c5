// func_unit: digital functional module of GRAMC.
//
// Post-processes computation results held in the output buffer, for the applications the
// paper maps onto the system: "the convolutional computation results are transferred to the
// digital functional module to execute the pooling and activation operations", and bit
// slicing, where two arrays hold the most and least significant 4 bits of an 8-bit weight
// matrix and their MVM results are recombined. Operations (one per start):
//   FOP_RELU  : dst[i] = max(0, src[i]),                         i < len
//   FOP_MAXP  : dst[k] = max(src[POOL*k .. POOL*k+POOL-1]),      k < len/POOL
//   FOP_SHADD : dst[i] = sat((src[i] << SLICE_SHIFT) + src[len+i])  (MSB words then LSB words)
//   FOP_COPY  : dst[i] = src[i]
//   FOP_ADD   : dst[i] = sat(src[i] + src[len+i])
//   FOP_SUB   : dst[i] = sat(src[i] - src[len+i])
// Pooling works on groups of POOL consecutive words: the program lays each pooling window
// out contiguously. The operation set follows the paper; the choice of ReLU, of max pooling
// and the data layout are this design's own (the paper names "pooling and activation").
// ADD and SUB are also this design's own: a 256-input layer of the paper's LeNet-5 needs two
// 128-row arrays whose partial results are summed, and signed weights need a pair of arrays
// (conductances are positive), whose results are subtracted.
// Timing: it issues one read per cycle on two synchronous buffer read ports and writes one
// result per cycle two cycles later; `done` is high in the cycle the last write is driven, so an
// operation on len words takes len + 2 cycles after `start`. `sat_count` counts SHADD results
// that saturated to the word range (SHADD, ADD, SUB).
module func_unit
  import gramc_pkg::*;
#(
  parameter int unsigned W    = DATA_W,
  parameter int unsigned AW   = 12,
  parameter int unsigned POOL = 4
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  fop_e          op,
  input  logic [AW-1:0] src,
  input  logic [AW-1:0] dst,
  input  logic [7:0]    len,
  output logic          busy,
  output logic          done,
  // output-buffer ports
  output logic [AW-1:0] rd_addr_a,
  input  logic [W-1:0]  rd_data_a,
  output logic [AW-1:0] rd_addr_b,
  input  logic [W-1:0]  rd_data_b,
  output logic          wr_en,
  output logic [AW-1:0] wr_addr,
  output logic [W-1:0]  wr_data,
  output logic [15:0]   sat_count
);
  localparam int PW = $clog2(POOL);

  fop_e          op_q;
  logic [AW-1:0] src_q, dst_q;
  logic [7:0]    len_q, idx;
  logic          rd_act, rd_act_q, last_q;
  logic [7:0]    idx_q;
  logic signed [W-1:0] pmax;
  logic signed [W-1:0] a_s, b_s;
  logic signed [W+SLICE_SHIFT:0] sum, acc;
  logic signed [W-1:0] res;
  logic          res_we, res_sat;
  logic [AW-1:0] res_addr;

  assign rd_act    = busy && (idx < len_q);
  assign rd_addr_a = src_q + AW'(idx);
  assign rd_addr_b = src_q + AW'(len_q) + AW'(idx);
  assign a_s       = signed'(rd_data_a);
  assign b_s       = signed'(rd_data_b);

  always_comb begin
    sum     = (W+SLICE_SHIFT+1)'(a_s) * (W+SLICE_SHIFT+1)'(2**SLICE_SHIFT) + (W+SLICE_SHIFT+1)'(b_s);
    unique case (op_q)
      FOP_ADD: acc = (W+SLICE_SHIFT+1)'(a_s) + (W+SLICE_SHIFT+1)'(b_s);
      FOP_SUB: acc = (W+SLICE_SHIFT+1)'(a_s) - (W+SLICE_SHIFT+1)'(b_s);
      default: acc = sum;
    endcase
    res     = a_s;
    res_we  = rd_act_q;
    res_sat = 1'b0;
    res_addr = dst_q + AW'(idx_q);
    unique case (op_q)
      FOP_RELU:  res = (a_s < 0) ? '0 : a_s;
      FOP_COPY:  res = a_s;
      FOP_SHADD, FOP_ADD, FOP_SUB: begin
        if (acc > (W+SLICE_SHIFT+1)'(2**(W-1)-1)) begin
          res = {1'b0, {(W-1){1'b1}}}; res_sat = rd_act_q;
        end else if (acc < -(W+SLICE_SHIFT+1)'(2**(W-1))) begin
          res = {1'b1, {(W-1){1'b0}}}; res_sat = rd_act_q;
        end else begin
          res = W'(acc);
        end
      end
      FOP_MAXP: begin
        res      = ((idx_q[PW-1:0] == '0) || (a_s > pmax)) ? a_s : pmax;
        res_we   = rd_act_q && (idx_q[PW-1:0] == PW'(POOL-1));
        res_addr = dst_q + AW'(idx_q >> PW);
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      done      <= 1'b0;
      op_q      <= FOP_RELU;
      src_q     <= '0;
      dst_q     <= '0;
      len_q     <= '0;
      idx       <= '0;
      idx_q     <= '0;
      rd_act_q  <= 1'b0;
      last_q    <= 1'b0;
      pmax      <= '0;
      wr_en     <= 1'b0;
      wr_addr   <= '0;
      wr_data   <= '0;
      sat_count <= '0;
    end else begin
      done     <= 1'b0;
      rd_act_q <= rd_act;
      idx_q    <= idx;
      last_q   <= rd_act && (idx == len_q - 8'd1);
      wr_en    <= res_we;
      wr_addr  <= res_addr;
      wr_data  <= res;
      if (rd_act_q) pmax <= res;
      if (res_sat)  sat_count <= sat_count + 16'd1;
      if (start && !busy) begin
        busy  <= 1'b1;
        op_q  <= op;
        src_q <= src;
        dst_q <= dst;
        len_q <= len;
        idx   <= '0;
      end else if (rd_act) begin
        idx <= idx + 8'd1;
      end
      if (last_q) begin
        busy <= 1'b0;
        done <= 1'b1;
      end
    end
  end
endmodule
