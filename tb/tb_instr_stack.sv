// tb_instr_stack: self-checking test of the instruction stack.
// Loads random 64-bit words, reads them back at random addresses and checks the data and
// the one-cycle read latency.
module tb_instr_stack;
  import gramc_pkg::*;
  logic clk = 0, ld_en = 0;
  logic [7:0] ld_addr = 0, rd_addr = 0;
  instr_t ld_data, rd_data;
  logic [63:0] model [256];
  int checks = 0, failures = 0;

  instr_stack #(.DEPTH(256)) dut (.clk, .ld_en, .ld_addr, .ld_data, .rd_addr, .rd_data);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ld_data = '0;
    for (int a = 0; a < 256; a++) begin
      @(negedge clk);
      ld_en = 1; ld_addr = 8'(a);
      model[a] = {$urandom, $urandom};
      ld_data = instr_t'(model[a]);
    end
    @(negedge clk) ld_en = 0;
    for (int i = 0; i < 1000; i++) begin
      @(negedge clk) rd_addr = 8'($urandom);
      @(posedge clk); #1;
      checks++;
      if (64'(rd_data) != model[rd_addr]) begin
        failures++;
        $display("addr %0d: %h expected %h", rd_addr, rd_data, model[rd_addr]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
