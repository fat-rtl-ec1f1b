// tb_mcad -- checks the column decoder enables exactly the columns in range.
module tb_mcad;
  localparam int COLS = 32;
  int checks = 0, failures = 0;
  logic [4:0] lo, hi;
  logic [COLS-1:0] bl, exp_bl;
  mcad #(.COLS(COLS)) dut (.col_lo(lo), .col_hi(hi), .bl_en(bl));
  initial begin
    #100000 failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int t = 0; t < 300; t++) begin
      lo = 5'($urandom); hi = 5'($urandom);
      if (t == 0) begin lo = 0; hi = 31; end
      #1;
      exp_bl = '0;
      for (int c = int'(lo); c <= int'(hi); c++) exp_bl[c] = 1'b1;
      checks++;
      if (bl !== exp_bl) begin failures++; $display("lo=%0d hi=%0d bl=%h", lo, hi, bl); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
