// tb_global_buffer: self-checking test of the global buffer (full 64K x 8 size).
// Writes a pattern computed from the address, reads back random addresses one cycle later.
module tb_global_buffer;
  logic clk = 0, wr_en = 0;
  logic [15:0] wr_addr = 0, rd_addr = 0;
  logic [7:0] wr_data = 0, rd_data;
  int checks = 0, failures = 0;

  function automatic logic [7:0] pat(int a);
    return 8'((a * 37) ^ (a >> 8));
  endfunction

  global_buffer dut (.clk, .wr_en, .wr_addr, .wr_data, .rd_addr, .rd_data);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < 65536; a++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 16'(a); wr_data = pat(a);
    end
    @(negedge clk) wr_en = 0;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk) rd_addr = 16'($urandom);
      @(posedge clk); #1;
      checks++;
      if (rd_data != pat(int'(rd_addr))) begin
        failures++;
        $display("addr %0d: %h expected %h", rd_addr, rd_data, pat(int'(rd_addr)));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
