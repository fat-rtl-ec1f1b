// tb_op_decoder -- checks the operation decoder against the enable and
// selector tables (READ..ADD -> EN_READ, EN_AND, EN_OR, Sel1, Sel2).
module tb_op_decoder;
  import fat_pkg::*;
  int checks = 0, failures = 0;
  sa_op_e   op;
  sa_ctrl_t ctrl;
  op_decoder dut (.op, .ctrl);

  // expected {en_read, en_and, en_or} and selector port per operation
  function automatic logic [4:0] expect_ctrl(sa_op_e o);
    logic [2:0] en; logic [1:0] sel;
    case (o)
      SA_READ: begin en = 3'b100; sel = 2'b01; end  // OR port
      SA_NOT:  begin en = 3'b011; sel = 2'b10; end  // XOR port
      SA_AND:  begin en = 3'b010; sel = 2'b00; end  // AND port
      SA_NAND: begin en = 3'b010; sel = 2'b10; end  // XOR port
      SA_OR:   begin en = 3'b001; sel = 2'b01; end  // OR port
      SA_XOR:  begin en = 3'b011; sel = 2'b10; end  // XOR port
      default: begin en = 3'b011; sel = 2'b11; end  // ADD -> SUM port
    endcase
    return {en, sel};
  endfunction

  initial begin
    #1000 failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i <= 6; i++) begin
      op = sa_op_e'(i);
      #1;
      checks++;
      if (ctrl !== expect_ctrl(op)) begin
        failures++;
        $display("op %s: got %b expected %b", op.name(), ctrl, expect_ctrl(op));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
