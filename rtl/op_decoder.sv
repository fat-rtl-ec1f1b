// op_decoder -- Operation Decoder of the memory controller.
//
// Maps a sense-amplifier operation to its three enable signals (EN_READ,
// EN_AND, EN_OR) and two selector signals (Sel1, Sel2). The enable columns
// are the paper's Table IV and the selector codes its Table V:
//   port AND = 00, OR = 01, XOR = 10, SUM = 11   (Sel1 Sel2)
//   READ -> OR port, NOT/NAND/XOR -> XOR port, AND -> AND port,
//   OR -> OR port, ADD -> SUM port.
// Purely combinational.
module op_decoder
  import fat_pkg::*;
(
  input  sa_op_e   op,
  output sa_ctrl_t ctrl
);
  always_comb begin
    unique case (op)
      //                    read and  or   s1   s2
      SA_READ: ctrl = '{1'b1, 1'b0, 1'b0, 1'b0, 1'b1};
      SA_NOT:  ctrl = '{1'b0, 1'b1, 1'b1, 1'b1, 1'b0};
      SA_AND:  ctrl = '{1'b0, 1'b1, 1'b0, 1'b0, 1'b0};
      SA_NAND: ctrl = '{1'b0, 1'b1, 1'b0, 1'b1, 1'b0};
      SA_OR:   ctrl = '{1'b0, 1'b0, 1'b1, 1'b0, 1'b1};
      SA_XOR:  ctrl = '{1'b0, 1'b1, 1'b1, 1'b1, 1'b0};
      SA_ADD:  ctrl = '{1'b0, 1'b1, 1'b1, 1'b1, 1'b1};
      default: ctrl = '{1'b1, 1'b0, 1'b0, 1'b0, 1'b1};
    endcase
  end
endmodule
