// tb_output_buffer: self-checking test of the output buffer and its three read ports.
module tb_output_buffer;
  logic clk = 0, wr_en = 0;
  logic [11:0] wr_addr = 0, ra = 0, rb = 0, rh = 0;
  logic [15:0] wr_data = 0, da, db, dh;
  int checks = 0, failures = 0;

  function automatic logic [15:0] pat(int a);
    return 16'((a * 2654435761) >> 7);
  endfunction

  output_buffer dut (.clk, .wr_en, .wr_addr, .wr_data, .rd_addr_a(ra), .rd_data_a(da),
                     .rd_addr_b(rb), .rd_data_b(db), .rd_addr_h(rh), .rd_data_h(dh));

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < 4096; a++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 12'(a); wr_data = pat(a);
    end
    @(negedge clk) wr_en = 0;
    for (int i = 0; i < 1000; i++) begin
      @(negedge clk);
      ra = 12'($urandom); rb = 12'($urandom); rh = 12'($urandom);
      @(posedge clk); #1;
      checks += 3;
      if (da != pat(int'(ra))) failures++;
      if (db != pat(int'(rb))) failures++;
      if (dh != pat(int'(rh))) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
