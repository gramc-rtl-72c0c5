// comparison_unit: comparison unit (CU) of the on-chip write-verify scheme.
//
// Per verify step it compares A, the conductance level read back through the ADC, with B,
// the ideal level from the global buffer, stores the outcome (A>B, A=B, A<B) in a flag
// register and derives the next write message, as in the CU drawing of the system figure
// (Verify -> Flag Register -> Write):
//   |A-B| <= tol         -> cell done (ok)
//   pulse count reached  -> cell done (failed), "write pulse number is larger than the
//                           maximum pulse number"
//   A < B                -> SET pulse; V_g is raised one step per SET pulse
//   A > B                -> RESET pulse; V_SL is raised one step per RESET pulse
// The step counters restart when the pulse direction changes and when a new cell starts
// (`first`); that restart rule is this design's choice. Timing: inputs are sampled when
// `valid` is high, the result is registered and valid one cycle later (`res_valid`).
module comparison_unit
  import gramc_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  valid,
  input  logic                  first,       // first verify of a new cell
  input  logic [LEVEL_BITS-1:0] a,           // read-back level
  input  logic [LEVEL_BITS-1:0] b,           // ideal level
  input  logic [LEVEL_BITS-1:0] tol,         // allowed error range in levels
  input  logic [7:0]            max_pulses,
  output logic                  res_valid,
  output logic                  res_ok,
  output logic                  res_fail,
  output logic                  res_pulse,   // a write pulse is to be applied
  output pulse_t                pulse,
  output logic                  flag_gt,     // flag register
  output logic                  flag_eq,
  output logic                  flag_lt
);
  logic [7:0] set_step, rst_step, npulse;
  logic [7:0] set_step_c, rst_step_c, npulse_c;
  logic [LEVEL_BITS:0] diff;
  logic gt, lt, in_range;

  always_comb begin
    set_step_c = first ? 8'd0 : set_step;
    rst_step_c = first ? 8'd0 : rst_step;
    npulse_c   = first ? 8'd0 : npulse;
    gt     = (a > b);
    lt     = (a < b);
    diff   = gt ? ({1'b0, a} - {1'b0, b}) : ({1'b0, b} - {1'b0, a});
    in_range = (diff <= {1'b0, tol});
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      set_step  <= '0;
      rst_step  <= '0;
      npulse    <= '0;
      res_valid <= 1'b0;
      res_ok    <= 1'b0;
      res_fail  <= 1'b0;
      res_pulse <= 1'b0;
      pulse     <= '0;
      flag_gt   <= 1'b0;
      flag_eq   <= 1'b0;
      flag_lt   <= 1'b0;
    end else begin
      res_valid <= valid;
      if (valid) begin
        flag_gt   <= gt;
        flag_eq   <= !gt && !lt;
        flag_lt   <= lt;
        res_ok    <= 1'b0;
        res_fail  <= 1'b0;
        res_pulse <= 1'b0;
        set_step  <= set_step_c;
        rst_step  <= rst_step_c;
        npulse    <= npulse_c;
        if (in_range) begin
          res_ok <= 1'b1;
        end else if (npulse_c >= max_pulses) begin
          res_fail <= 1'b1;
        end else if (lt) begin
          res_pulse  <= 1'b1;
          pulse.set  <= 1'b1;
          pulse.step <= set_step_c;
          set_step   <= set_step_c + 8'd1;
          rst_step   <= 8'd0;
          npulse     <= npulse_c + 8'd1;
        end else begin
          res_pulse  <= 1'b1;
          pulse.set  <= 1'b0;
          pulse.step <= rst_step_c;
          rst_step   <= rst_step_c + 8'd1;
          set_step   <= 8'd0;
          npulse     <= npulse_c + 8'd1;
        end
      end
    end
  end
endmodule
