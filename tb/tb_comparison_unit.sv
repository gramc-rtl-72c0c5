// tb_comparison_unit: self-checking test of the write-verify comparison unit.
// Random verify sequences; a reference model here tracks the SET/RESET step counters and
// the pulse count and predicts each decision and the flag register.
module tb_comparison_unit;
  import gramc_pkg::*;
  logic clk = 0, rst_n = 0, valid = 0, first = 0;
  logic [3:0] a = 0, b = 0, tol = 0;
  logic [7:0] max_pulses = 8;
  logic res_valid, res_ok, res_fail, res_pulse, flag_gt, flag_eq, flag_lt;
  pulse_t pulse;
  int checks = 0, failures = 0;
  int set_s = 0, rst_s = 0, np = 0;
  int n_ok = 0, n_fail = 0, n_set = 0, n_rst = 0;

  comparison_unit dut (.clk, .rst_n, .valid, .first, .a, .b, .tol, .max_pulses, .res_valid,
                       .res_ok, .res_fail, .res_pulse, .pulse, .flag_gt, .flag_eq, .flag_lt);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 5000; i++) begin
      int d; bit e_ok, e_fail, e_set; int e_step;
      @(negedge clk);
      first = ($urandom % 10 == 0);
      a = 4'($urandom); b = 4'($urandom);
      if ($urandom % 4 == 0) b = a;
      tol = 4'($urandom % 2);
      max_pulses = 8'(4 + $urandom % 20);
      valid = 1;
      if (first) begin set_s = 0; rst_s = 0; np = 0; end
      d = int'(a) - int'(b); if (d < 0) d = -d;
      e_ok = (d <= int'(tol)); e_fail = 0; e_set = 0; e_step = 0;
      if (!e_ok) begin
        if (np >= int'(max_pulses)) e_fail = 1;
        else if (a < b) begin e_set = 1; e_step = set_s; set_s++; rst_s = 0; np++; end
        else begin e_step = rst_s; rst_s++; set_s = 0; np++; end
      end
      @(posedge clk); #1;
      valid = 0;
      checks++;
      if (!res_valid || res_ok != e_ok || res_fail != e_fail || res_pulse != (!e_ok && !e_fail) ||
          (res_pulse && (pulse.set != e_set || int'(pulse.step) != e_step)) ||
          flag_gt != (a > b) || flag_eq != (a == b) || flag_lt != (a < b)) begin
        failures++;
        $display("i=%0d a=%0d b=%0d ok=%0d fail=%0d pulse=%0d set=%0d step=%0d exp ok=%0d fail=%0d set=%0d step=%0d",
                 i, a, b, res_ok, res_fail, res_pulse, pulse.set, pulse.step, e_ok, e_fail, e_set, e_step);
      end
      if (e_ok) n_ok++; else if (e_fail) n_fail++; else if (e_set) n_set++; else n_rst++;
      @(posedge clk); #1;
      checks++;
      if (res_valid) failures++;     // result is a single-cycle pulse per request
    end
    checks++;
    if (n_ok == 0 || n_fail == 0 || n_set == 0 || n_rst == 0) failures++;
    $display("ok=%0d fail=%0d set=%0d reset=%0d", n_ok, n_fail, n_set, n_rst);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
