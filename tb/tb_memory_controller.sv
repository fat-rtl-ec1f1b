// tb_memory_controller -- checks the control signals the memory controller
// drives for each instruction, cycle by cycle: the rows raised on the two
// word-line ports, the write-back row and data, the SA enable/selector code,
// and the carry preset. An ADD of n bits must raise rows a+k and b+k and
// write d+k for k = 0..n-1 in n consecutive cycles; a SUB must run NOT b
// (against the all-ones row) then ADD with carry-in 1 with no gap.
module tb_memory_controller;
  import fat_pkg::*;
  localparam int ROWS = 64, COLS = 8, MH = 4;
  localparam int RAW = 7, AW = 6, CAW = 3, OUT_W = 11;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready, ra_en, rb_en, we, cl, ci, ce, ov, rv, done;
  cma_cmd_t cmd;
  logic [COLS-1:0] wd_in, wdata, sa_out, orow;
  logic [MH-1:0][1:0] w;
  logic [RAW-1:0] ra, rb;
  logic [CAW-1:0] lo, hi;
  logic [AW-1:0] wrow;
  sa_ctrl_t ctrl;
  logic signed [OUT_W-1:0] res [COLS];
  memory_controller #(.ROWS(ROWS), .COLS(COLS), .MH(MH)) dut (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .cmd_wdata(wd_in), .cmd_w(w),
    .ra, .ra_en, .rb, .rb_en, .col_lo(lo), .col_hi(hi), .we, .wrow, .wdata,
    .sa_ctrl(ctrl), .carry_load(cl), .carry_init(ci), .carry_en(ce), .sa_out,
    .out_valid(ov), .out_row(orow), .res, .res_valid(rv), .done);
  always #5 clk = ~clk;
  always @(negedge clk) sa_out = COLS'($urandom);

  sa_ctrl_t c_add, c_not;
  op_decoder d1 (.op(SA_ADD), .ctrl(c_add));
  op_decoder d2 (.op(SA_NOT), .ctrl(c_not));

  // expected trace of one operation
  task automatic expect_steps(input int a, input int b, input int d, input int n,
                              input sa_ctrl_t c, input logic cin);  // cin: a carry-1 preset is due in the last step
    for (int k = 0; k < n; k++) begin
      #1;
      checks++;
      if (!(ra_en && rb_en && int'(ra) == a + k && int'(rb) == ((b > ROWS) ? b : b + k) &&
            we && int'(wrow) == d + k && wdata == sa_out && ctrl == c)) begin
        failures++; $display("step %0d: ra=%0d rb=%0d we=%0d wrow=%0d", k, ra, rb, we, wrow);
      end
      // the next operation (if any) is accepted, and its carry preset, in the last step
      if (k == n - 1 && cin) begin checks++; if (!(cl && ci)) begin failures++; $display("carry preset"); end end
      @(negedge clk);
    end
  endtask

  initial begin
    #2000000 failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    cmd_valid = 0; cmd = '0; wd_in = 0; w = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 30; t++) begin
      int a, b, d, n; logic sub;
      a = $urandom_range(0, 15); b = $urandom_range(16, 31); d = $urandom_range(32, 47);
      n = $urandom_range(1, 16); sub = 1'($urandom);
      cmd = '0; cmd.cmd = sub ? CMD_SUB : CMD_ADD; cmd.row_a = row_addr_t'(a);
      cmd.row_b = row_addr_t'(b); cmd.row_d = row_addr_t'(d); cmd.nbits = 6'(n);
      cmd.cin = 1'b0; cmd.col_hi = 16'(COLS - 1);
      checks++; if (!cmd_ready) begin failures++; $display("not ready"); end
      cmd_valid = 1; @(negedge clk); cmd_valid = 0;
      // one cycle to hand the first operation to the engine
      #1; checks++; if (!cl || ci || ra_en) begin failures++; $display("no carry preset at start"); end
      @(negedge clk);
      if (sub) begin
        expect_steps(b, ROWS + 1, d, n, c_not, 1'b1);
        // ADD is accepted in the last NOT step: check its preset value
        expect_steps(a, d, d, n, c_add, 1'b0);
      end else begin
        expect_steps(a, b, d, n, c_add, 1'b0);
      end
      #1; checks++; if (ra_en || we) begin failures++; $display("engine still active"); end
      while (!cmd_ready) @(negedge clk);
    end
    // WRITE
    for (int t = 0; t < 10; t++) begin
      cmd = '0; cmd.cmd = CMD_WRITE; cmd.row_d = row_addr_t'($urandom_range(0, ROWS - 1));
      cmd.col_lo = 16'(1); cmd.col_hi = 16'(5); wd_in = COLS'($urandom);
      cmd_valid = 1; @(negedge clk); cmd_valid = 0; #1;
      checks++;
      if (!we || wrow != AW'(cmd.row_d) || wdata != wd_in || lo != 1 || hi != 5) begin
        failures++; $display("WRITE signals");
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
