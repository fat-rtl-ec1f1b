// tb_sense_amp -- drives the sense-amplifier bank with the sensed levels two
// operand bits produce and checks every operation's OUT port, plus
// multi-bit bit-serial addition and subtraction through the carry latch
// against integer arithmetic.
module tb_sense_amp;
  import fat_pkg::*;
  localparam int COLS = 16;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [COLS-1:0] ge1, ge2, out, cq;
  sa_ctrl_t ctrl;
  sa_op_e op;
  logic cl, ci, ce;
  op_decoder dec (.op, .ctrl);
  sense_amp #(.COLS(COLS)) dut (.clk, .rst_n, .sl_ge1(ge1), .sl_ge2(ge2), .ctrl,
                                .carry_load(cl), .carry_init(ci), .carry_en(ce), .out, .carry_q(cq));
  always #5 clk = ~clk;

  task automatic sense(input logic [COLS-1:0] a, input logic [COLS-1:0] b, input logic two);
    if (two) begin ge1 = a | b; ge2 = a & b; end
    else     begin ge1 = a;     ge2 = '0;    end
  endtask

  initial begin
    #500000 failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    logic [COLS-1:0] a, b, e;
    cl = 0; ci = 0; ce = 0; op = SA_READ; ge1 = 0; ge2 = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    // single-cycle operations
    for (int t = 0; t < 200; t++) begin
      a = COLS'($urandom); b = COLS'($urandom);
      op = sa_op_e'($urandom_range(0, 5));
      case (op)
        SA_READ: begin sense(a, 0, 0);  e = a;        end
        SA_NOT:  begin sense(a, '1, 1); e = ~a;       end
        SA_AND:  begin sense(a, b, 1);  e = a & b;    end
        SA_NAND: begin sense(a, b, 1);  e = ~(a & b); end
        SA_OR:   begin sense(a, b, 1);  e = a | b;    end
        default: begin sense(a, b, 1);  e = a ^ b;    end
      endcase
      #1; checks++;
      if (out !== e) begin failures++; $display("%s a=%h b=%h out=%h exp=%h", op.name(), a, b, out, e); end
      @(negedge clk);
    end
    // bit-serial ADD / SUB of 8-bit numbers in each column
    for (int t = 0; t < 40; t++) begin
      logic [7:0] x [COLS], y [COLS], s [COLS];
      logic sub;
      sub = 1'($urandom);
      for (int c = 0; c < COLS; c++) begin x[c] = 8'($urandom); y[c] = 8'($urandom); end
      @(negedge clk); cl = 1; ci = sub; ce = 0; @(negedge clk); cl = 0;
      op = SA_ADD;
      for (int k = 0; k < 8; k++) begin
        for (int c = 0; c < COLS; c++) begin a[c] = x[c][k]; b[c] = sub ? ~y[c][k] : y[c][k]; end
        sense(a, b, 1); ce = 1; #1;
        for (int c = 0; c < COLS; c++) s[c][k] = out[c];
        @(negedge clk);
      end
      ce = 0;
      for (int c = 0; c < COLS; c++) begin
        checks++;
        if (s[c] !== (sub ? 8'(x[c] - y[c]) : 8'(x[c] + y[c]))) begin
          failures++; $display("%s x=%0d y=%0d got %0d", sub ? "SUB" : "ADD", x[c], y[c], s[c]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
