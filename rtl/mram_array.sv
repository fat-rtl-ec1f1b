// mram_array -- behavioural model of the STT-MRAM cell array of one CMA.
//
// Behavioural model: the real part is an array of 1T-1MTJ cells whose
// Source-Line voltage depends on how many activated cells are in the
// high-resistance (anti-parallel, "1") state. This model keeps the cell
// states as bits and reports, for every enabled column, the three distinct
// sensed levels that the sense amplifier compares against its references:
//   sl_ge1 = at least one activated cell stores 1   (V_SL above V_OR)
//   sl_ge2 = two activated cells store 1             (V_SL above V_AND)
// At most two word lines are raised at a time, as in the paper; the model
// sums only the first two ones it finds. A column whose bit line is not
// enabled carries no current and senses level 0.
//
// Rows 0..ROWS-1 are data rows. Word line ROWS is a hard-wired all-zero
// reference row and word line ROWS+1 a hard-wired all-ones row (used for NOT
// as XOR with ones); both are this design's own choice of where such rows live.
//
// Timing: sensing is combinational from the word lines; a write lands at the
// rising clock edge (wdata written to row wrow in the enabled columns).
// Cell contents are not reset: the cells are non-volatile.
module mram_array #(
  parameter int unsigned ROWS = fat_pkg::ROWS_DEF,
  parameter int unsigned COLS = fat_pkg::COLS_DEF,
  localparam int unsigned WLS = ROWS + 2,
  localparam int unsigned AW  = $clog2(ROWS)
) (
  input  logic            clk,
  input  logic [WLS-1:0]  wl,
  input  logic [COLS-1:0] bl_en,
  input  logic            we,
  input  logic [AW-1:0]   wrow,
  input  logic [COLS-1:0] wdata,
  output logic [COLS-1:0] sl_ge1,
  output logic [COLS-1:0] sl_ge2
);
  logic [COLS-1:0] cells [ROWS];

  always_ff @(posedge clk) begin
    if (we) cells[wrow] <= (cells[wrow] & ~bl_en) | (wdata & bl_en);
  end

  always_comb begin
    logic [COLS-1:0] row;
    logic [COLS-1:0] ge1, ge2;
    ge1 = '0;
    ge2 = '0;
    row = '0;
    for (int unsigned r = 0; r < WLS; r++) begin
      if (wl[r]) begin
        if (r < ROWS)       row = cells[r];
        else if (r == ROWS) row = '0;
        else                row = '1;
        ge2 = ge2 | (ge1 & row);
        ge1 = ge1 | row;
      end
    end
    sl_ge1 = ge1 & bl_en;
    sl_ge2 = ge2 & bl_en;
  end

  // The sense amplifier tells apart only 00, 01/10 and 11.
  a_two_rows_max: assert property (@(posedge clk) $countones(wl) <= 2);
endmodule
