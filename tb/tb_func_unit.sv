// tb_func_unit: self-checking test of the digital functional module.
// A buffer model here serves the two read ports and records the writes. ReLU, max pooling,
// bit-slice recombination, add and subtract (with saturation) and copy are checked against values computed
// here, and so is the latency of len + 2 cycles from start to done.
module tb_func_unit;
  import gramc_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  fop_e op;
  logic [11:0] src, dst, ra, rb, wa;
  logic [7:0] len;
  logic busy, done, we;
  logic [15:0] da, db, wd, sat_count;
  logic signed [15:0] mem [4096];
  int checks = 0, failures = 0;

  func_unit #(.AW(12), .POOL(4)) dut (.clk, .rst_n, .start, .op, .src, .dst, .len, .busy, .done,
    .rd_addr_a(ra), .rd_data_a(da), .rd_addr_b(rb), .rd_data_b(db),
    .wr_en(we), .wr_addr(wa), .wr_data(wd), .sat_count);

  always #5 clk = ~clk;
  always_ff @(posedge clk) begin
    da <= mem[ra];
    db <= mem[rb];
    if (we) mem[wa] <= wd;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(fop_e o, int s, int d, int n);
    int t;
    @(negedge clk);
    op = o; src = 12'(s); dst = 12'(d); len = 8'(n); start = 1;
    @(negedge clk) start = 0;
    t = 1;
    while (!done) begin @(negedge clk); t++; end
    checks++;
    if (t != n + 2) begin failures++; $display("op %0d latency %0d expected %0d", o, t, n + 2); end
    @(negedge clk);
  endtask

  initial begin
    logic signed [15:0] in [512];
    int n, e, nsat0;
    op = FOP_RELU; src = 0; dst = 0; len = 1;
    for (int i = 0; i < 4096; i++) mem[i] = 16'($urandom);
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 40; trial++) begin
      n = 4 * (1 + $urandom % 60);
      for (int i = 0; i < 2 * n; i++) begin
        in[i] = (trial % 2) ? 16'($urandom) : 16'($signed($urandom % 4096) - 2048);
        mem[i] = in[i];
      end
      // ReLU
      run(FOP_RELU, 0, 1024, n);
      for (int i = 0; i < n; i++) begin
        checks++;
        if (mem[1024 + i] != ((in[i] < 0) ? 16'sd0 : in[i])) failures++;
      end
      // Max pooling over groups of 4
      run(FOP_MAXP, 0, 2048, n);
      for (int k = 0; k < n / 4; k++) begin
        e = in[4*k];
        for (int j = 1; j < 4; j++) if (in[4*k+j] > e) e = in[4*k+j];
        checks++;
        if (int'(mem[2048 + k]) != e) begin failures++; $display("maxp k=%0d got %0d exp %0d", k, mem[2048+k], e); end
      end
      // Bit-slice recombination: MSB words at 0..n-1, LSB words at n..2n-1
      nsat0 = int'(sat_count);
      run(FOP_SHADD, 0, 3072, n);
      e = 0;
      for (int i = 0; i < n; i++) begin
        int v;
        v = int'(in[i]) * 16 + int'(in[n + i]);
        if (v > 32767) begin v = 32767; e++; end
        if (v < -32768) begin v = -32768; e++; end
        checks++;
        if (int'(mem[3072 + i]) != v) begin failures++; $display("shadd i=%0d got %0d exp %0d", i, mem[3072+i], v); end
      end
      checks++;
      if (int'(sat_count) - nsat0 != e) begin failures++; $display("sat count"); end
      // Partial-sum add and differential subtract
      for (int o = 0; o < 2; o++) begin
        nsat0 = int'(sat_count);
        run(o ? FOP_SUB : FOP_ADD, 0, 3584, n);
        e = 0;
        for (int i = 0; i < n; i++) begin
          int v;
          v = o ? int'(in[i]) - int'(in[n + i]) : int'(in[i]) + int'(in[n + i]);
          if (v > 32767) begin v = 32767; e++; end
          if (v < -32768) begin v = -32768; e++; end
          checks++;
          if (int'(mem[3584 + i]) != v) begin failures++; $display("add/sub %0d i=%0d got %0d exp %0d", o, i, mem[3584+i], v); end
        end
        checks++;
        if (int'(sat_count) - nsat0 != e) failures++;
      end
      // Copy
      run(FOP_COPY, n, 512, n);
      for (int i = 0; i < n; i++) begin
        checks++;
        if (mem[512 + i] != in[n + i]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
