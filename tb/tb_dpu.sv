// tb_dpu -- checks ReLU, batch-normalisation scaling and saturation of the
// DPU lane by lane against an integer model, and its one-cycle latency.
module tb_dpu;
  localparam int COLS = 8, IN_W = 32, AB = 8;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, iv, ov, relu;
  logic signed [IN_W-1:0] x [COLS], mean;
  logic signed [15:0] scale;
  logic [4:0] sh;
  logic signed [AB-1:0] y [COLS];
  dpu #(.COLS(COLS), .IN_W(IN_W), .SCALE_W(16), .ACT_BITS(AB)) dut (.clk, .rst_n, .in_valid(iv),
    .in_vec(x), .relu_en(relu), .bn_mean(mean), .bn_scale(scale), .bn_shift(sh), .out_valid(ov), .out_vec(y));
  always #5 clk = ~clk;
  function automatic int model(int v, bit re, int m, int s, int shf);
    longint r, z;
    r = (re && v < 0) ? 0 : v;
    z = ((r - m) * s) >>> shf;
    if (z > 127) return 127;
    if (z < -128) return -128;
    return int'(z);
  endfunction
  initial begin
    #1000000 failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    iv = 0; relu = 0; mean = 0; scale = 0; sh = 0;
    foreach (x[c]) x[c] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      foreach (x[c]) x[c] = $signed($urandom_range(0, 4000)) - 2000;
      relu = 1'($urandom); mean = $signed($urandom_range(0, 200)) - 100;
      scale = 16'($signed($urandom_range(0, 600)) - 100); sh = 5'($urandom_range(0, 8));
      iv = 1; @(negedge clk); iv = 0;
      checks++; if (!ov) begin failures++; $display("no out_valid"); end
      foreach (x[c]) begin
        checks++;
        if (int'(y[c]) != model(x[c], relu, mean, scale, sh)) begin
          failures++; $display("x=%0d relu=%0d m=%0d s=%0d sh=%0d y=%0d", x[c], relu, mean, scale, sh, y[c]);
        end
      end
      @(negedge clk);
      checks++; if (ov) begin failures++; $display("out_valid held"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
