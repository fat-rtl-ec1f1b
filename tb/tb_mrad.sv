// tb_mrad -- checks the row decoder raises exactly the addressed word lines.
module tb_mrad;
  localparam int ROWS = 30;
  localparam int RAW = $clog2(ROWS + 2);
  int checks = 0, failures = 0;
  logic [RAW-1:0] ra, rb;
  logic ra_en, rb_en;
  logic [ROWS+1:0] wl, exp_wl;
  mrad #(.ROWS(ROWS)) dut (.ra, .ra_en, .rb, .rb_en, .wl);
  initial begin
    #100000 failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int t = 0; t < 400; t++) begin
      ra = RAW'($urandom_range(0, ROWS + 1)); rb = RAW'($urandom_range(0, ROWS + 1));
      ra_en = 1'($urandom); rb_en = 1'($urandom);
      #1;
      exp_wl = '0;
      for (int r = 0; r < ROWS + 2; r++)
        exp_wl[r] = (ra_en && ra == RAW'(r)) || (rb_en && rb == RAW'(r));
      checks++;
      if (wl !== exp_wl) begin failures++; $display("ra=%0d rb=%0d wl=%b", ra, rb, wl); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
