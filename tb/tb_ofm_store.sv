// tb_ofm_store -- checks that a feature-map vector is turned into ACT_BITS
// column-major WRITE instructions (row base+k carries bit k of each lane) to
// the selected array, honouring back-pressure.
module tb_ofm_store;
  import fat_pkg::*;
  localparam int N = 4, COLS = 8, AB = 8;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start, busy, wv, wr;
  logic signed [AB-1:0] vec [COLS];
  logic [1:0] sel, wsel;
  row_addr_t base;
  cma_cmd_t cmd;
  logic [COLS-1:0] wd;
  ofm_store #(.NUM_CMA(N), .COLS(COLS), .ACT_BITS(AB)) dut (.clk, .rst_n, .start, .vec, .cma_sel(sel),
    .base_row(base), .busy, .wr_valid(wv), .wr_ready(wr), .wr_sel(wsel), .wr_cmd(cmd), .wr_data(wd));
  always #5 clk = ~clk;
  initial begin
    #1000000 failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    start = 0; wr = 0; sel = 0; base = 0;
    foreach (vec[c]) vec[c] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      logic signed [AB-1:0] v [COLS];
      logic [AB-1:0] got [COLS];
      int nw;
      foreach (v[c]) begin v[c] = AB'($urandom); vec[c] = v[c]; end
      sel = 2'($urandom); base = row_addr_t'($urandom_range(0, 100));
      start = 1; @(negedge clk); start = 0;
      foreach (vec[c]) vec[c] = 0;
      nw = 0;
      while (busy) begin
        wr = 1'($urandom);
        #1;
        if (wv && wr) begin
          int k; k = int'(cmd.row_d) - int'(base);
          checks++;
          if (cmd.cmd != CMD_WRITE || wsel != sel || k != nw) begin
            failures++; $display("bad write cmd row %0d k %0d", cmd.row_d, nw);
          end
          if (k >= 0 && k < AB) foreach (got[c]) got[c][k] = wd[c];
          nw++;
        end
        @(negedge clk);
      end
      wr = 0;
      checks++; if (nw != AB) begin failures++; $display("%0d writes", nw); end
      foreach (v[c]) begin
        checks++; if (got[c] !== v[c]) begin failures++; $display("lane %0d %h vs %h", c, got[c], v[c]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
