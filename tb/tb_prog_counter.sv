// tb_prog_counter: self-checking test of the program counter.
// Drives random clear/advance sequences and compares the PC with a reference count.
module tb_prog_counter;
  logic clk = 0, rst_n = 0, clear = 0, advance = 0;
  logic [7:0] pc;
  int checks = 0, failures = 0;
  int ref_pc = 0;

  prog_counter #(.AW(8)) dut (.clk, .rst_n, .clear, .advance, .pc);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      checks++;
      if (int'(pc) != ref_pc) begin
        failures++;
        $display("pc=%0d expected %0d", pc, ref_pc);
      end
      clear   = ($urandom % 50) == 0;
      advance = ($urandom % 3) != 0;
      if (clear) ref_pc = 0;
      else if (advance) ref_pc = (ref_pc + 1) % 256;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
