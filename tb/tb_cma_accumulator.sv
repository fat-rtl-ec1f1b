// tb_cma_accumulator -- models NUM_CMA arrays' column results behind the bus
// multiplexer and checks the accumulated sums over random groups and the
// count+1 cycle latency.
module tb_cma_accumulator;
  localparam int N = 8, COLS = 6, IN_W = 16, ACC_W = 32;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start, busy, av;
  logic [2:0] base, sel;
  logic [3:0] count;
  logic signed [IN_W-1:0] res [N][COLS];
  logic signed [ACC_W-1:0] acc [COLS];
  cma_accumulator #(.NUM_CMA(N), .COLS(COLS), .IN_W(IN_W), .ACC_W(ACC_W)) dut (.clk, .rst_n, .start,
    .base, .count, .busy, .bus_sel(sel), .bus_data(res[sel]), .acc, .acc_valid(av));
  always #5 clk = ~clk;
  initial begin
    #1000000 failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    start = 0; base = 0; count = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      int b, n, cyc;
      foreach (res[i, c]) res[i][c] = IN_W'($urandom);
      b = $urandom_range(0, N - 1); n = $urandom_range(0, N - b);
      base = 3'(b); count = 4'(n); start = 1; @(negedge clk); start = 0; cyc = 1;
      while (!av && cyc < 40) begin @(negedge clk); cyc++; end
      checks++; if (cyc != n + 2) begin failures++; $display("n=%0d cycles=%0d", n, cyc); end
      for (int c = 0; c < COLS; c++) begin
        int e; e = 0;
        for (int i = b; i < b + n; i++) e += int'(res[i][c]);
        checks++;
        if (int'(acc[c]) != e) begin failures++; $display("b=%0d n=%0d c=%0d acc=%0d exp %0d", b, n, c, acc[c], e); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
