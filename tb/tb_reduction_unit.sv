// tb_reduction_unit -- feeds random column-major results bit by bit and
// checks per-column values and grouped column sums for every group size.
module tb_reduction_unit;
  localparam int COLS = 16, PB = 8, OUT_W = PB + 4;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clear, bv, yv;
  logic [3:0] g;
  logic [5:0] bk;
  logic [COLS-1:0] row;
  logic signed [OUT_W-1:0] y [COLS];
  reduction_unit #(.COLS(COLS), .PSUM_BITS(PB)) dut (.clk, .rst_n, .clear, .red_log2(g),
    .bit_valid(bv), .bit_k(bk), .bit_row(row), .y, .y_valid(yv));
  always #5 clk = ~clk;
  initial begin
    #1000000 failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    clear = 0; bv = 0; bk = 0; row = 0; g = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 50; t++) begin
      logic signed [PB-1:0] v [COLS];
      int gs, lat;
      gs = t % 5;
      foreach (v[c]) v[c] = PB'($urandom);
      @(negedge clk); clear = 1; g = 4'(gs); @(negedge clk); clear = 0; g = 0;
      checks++; if (yv) begin failures++; $display("valid not cleared"); end
      for (int k = 0; k < PB; k++) begin
        bv = 1; bk = 6'(k);
        foreach (v[c]) row[c] = v[c][k];
        @(negedge clk);
      end
      bv = 0; lat = 0;
      while (!yv && lat < 5) begin @(negedge clk); lat++; end
      checks++; if (lat != 1) begin failures++; $display("latency %0d", lat); end
      for (int i = 0; i < COLS; i++) begin
        int e; e = 0;
        if (i < (COLS >> gs)) for (int c = i << gs; c < ((i + 1) << gs); c++) e += int'(v[c]);
        checks++;
        if (int'(y[i]) != e) begin failures++; $display("g=%0d y[%0d]=%0d exp %0d", gs, i, y[i], e); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
