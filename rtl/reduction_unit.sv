// reduction_unit -- reduction unit of the SACU.
//
// Collects a column-major result as it is read out bit by bit through the
// sense amplifiers (one row per cycle, bit k of every column), rebuilds the
// PSUM_BITS-bit signed value of each column and outputs either the column
// values themselves (red_log2 = 0, the paper's "Y = (Col1, Col2)") or the sums
// of groups of 2**red_log2 adjacent columns ("Y = Col1 + Col2"), group g in
// y[g] and the remaining entries zero. Used when one dot product was spread
// over several columns of the same array.
//
// Timing: clear empties it; bit_valid/bit_k/bit_row deliver the rows; one
// cycle after bit PSUM_BITS-1 arrives, y is updated and y_valid rises and
// stays high until the next clear. The grouping is this design's choice of
// how to generalise the paper's two-column example.
module reduction_unit #(
  parameter int unsigned COLS      = fat_pkg::COLS_DEF,
  parameter int unsigned PSUM_BITS = fat_pkg::PSUM_BITS_DEF,
  localparam int unsigned OUT_W    = PSUM_BITS + $clog2(COLS)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        clear,
  input  logic [3:0]                  red_log2,
  input  logic                        bit_valid,
  input  logic [5:0]                  bit_k,
  input  logic [COLS-1:0]             bit_row,
  output logic signed [OUT_W-1:0]     y [COLS],
  output logic                        y_valid
);
  localparam int unsigned KW = (PSUM_BITS <= 1) ? 1 : $clog2(PSUM_BITS);
  logic [PSUM_BITS-1:0] word [COLS];
  logic                 fin;
  logic [3:0]           g_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fin     <= 1'b0;
      y_valid <= 1'b0;
      g_q     <= '0;
      for (int c = 0; c < COLS; c++) begin
        word[c] <= '0;
        y[c]    <= '0;
      end
    end else begin
      fin <= 1'b0;
      if (clear) begin
        y_valid <= 1'b0;
        g_q     <= red_log2;
      end
      if (bit_valid && 32'(bit_k) < PSUM_BITS) begin
        for (int c = 0; c < COLS; c++) word[c][KW'(bit_k)] <= bit_row[c];
        if (32'(bit_k) == PSUM_BITS - 1) fin <= 1'b1;
      end
      if (fin) begin
        logic signed [OUT_W-1:0] acc [COLS];
        for (int c = 0; c < COLS; c++) acc[c] = '0;
        for (int c = 0; c < COLS; c++)
          acc[c >> g_q] = acc[c >> g_q] + OUT_W'(signed'(word[c]));
        for (int c = 0; c < COLS; c++) y[c] <= acc[c];
        y_valid <= 1'b1;
      end
    end
  end
endmodule
