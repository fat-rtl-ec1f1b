// tb_mram_array -- writes random rows, then senses one or two rows at a time
// and checks the sensed levels against a reference copy of the contents,
// including the zero/ones reference rows and disabled bit lines.
module tb_mram_array;
  localparam int ROWS = 16, COLS = 12;
  int checks = 0, failures = 0;
  logic clk = 0;
  logic [ROWS+1:0] wl;
  logic [COLS-1:0] bl_en, wdata, ge1, ge2;
  logic we;
  logic [3:0] wrow;
  logic [COLS-1:0] ref_m [ROWS+2];
  mram_array #(.ROWS(ROWS), .COLS(COLS)) dut (.clk, .wl, .bl_en, .we, .wrow, .wdata,
                                             .sl_ge1(ge1), .sl_ge2(ge2));
  always #5 clk = ~clk;
  initial begin
    #200000 failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    wl = '0; we = 0; bl_en = '1; wrow = 0; wdata = 0;
    ref_m[ROWS] = '0; ref_m[ROWS+1] = '1;
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk); we = 1; wrow = 4'(r); wdata = COLS'($urandom); bl_en = '1;
      ref_m[r] = wdata;
    end
    // masked writes
    for (int t = 0; t < 20; t++) begin
      @(negedge clk); we = 1; wrow = 4'($urandom); wdata = COLS'($urandom); bl_en = COLS'($urandom);
      ref_m[wrow] = (ref_m[wrow] & ~bl_en) | (wdata & bl_en);
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 300; t++) begin
      int a, b; logic two;
      a = $urandom_range(0, ROWS + 1); b = $urandom_range(0, ROWS + 1); two = 1'($urandom);
      if (a == b) two = 0;
      bl_en = COLS'($urandom);
      wl = '0; wl[a] = 1'b1; if (two) wl[b] = 1'b1;
      #1;
      checks++;
      if (two) begin
        if (ge1 !== ((ref_m[a] | ref_m[b]) & bl_en) || ge2 !== (ref_m[a] & ref_m[b] & bl_en)) begin
          failures++; $display("rows %0d,%0d ge1=%b ge2=%b", a, b, ge1, ge2);
        end
      end else if (ge1 !== (ref_m[a] & bl_en) || ge2 !== '0) begin
        failures++; $display("row %0d ge1=%b ge2=%b", a, ge1, ge2);
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
