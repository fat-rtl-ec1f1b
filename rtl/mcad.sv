// mcad -- Memory Column Address Decoder / write-driver enable of one CMA.
//
// Turns the inclusive column range [col_lo, col_hi] sent by the memory
// controller into bit-line enables. Only enabled columns conduct read current
// to their sense amplifiers and only they are driven on a write, so a range
// selects which vector lanes take part in an operation. An empty range
// (col_lo > col_hi) enables nothing. The range form of the address is this
// design's choice; the paper only says the decoder activates the bit lines
// of the columns that hold the operands. Purely combinational.
module mcad #(
  parameter int unsigned COLS = fat_pkg::COLS_DEF,
  localparam int unsigned CAW = $clog2(COLS)
) (
  input  logic [CAW-1:0]  col_lo,
  input  logic [CAW-1:0]  col_hi,
  output logic [COLS-1:0] bl_en
);
  always_comb begin
    for (int unsigned c = 0; c < COLS; c++)
      bl_en[c] = (CAW'(c) >= col_lo) && (CAW'(c) <= col_hi);
  end
endmodule
