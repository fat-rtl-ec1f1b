// mrad -- Memory Row Address Decoder of one CMA.
//
// Decodes up to two row addresses from the memory controller into word-line
// activations. Raising two word lines at once is what lets the sense
// amplifier see two operands in one read (Boolean functions and addition).
// Addresses ROWS and ROWS+1 select the all-zero and all-ones reference rows.
// If both addresses are enabled and equal, one word line is raised.
// Purely combinational.
module mrad #(
  parameter int unsigned ROWS = fat_pkg::ROWS_DEF,
  localparam int unsigned WLS = ROWS + 2,
  localparam int unsigned RAW = $clog2(WLS)
) (
  input  logic [RAW-1:0] ra,
  input  logic           ra_en,
  input  logic [RAW-1:0] rb,
  input  logic           rb_en,
  output logic [WLS-1:0] wl
);
  always_comb begin
    wl = '0;
    if (ra_en && 32'(ra) < WLS) wl[ra] = 1'b1;
    if (rb_en && 32'(rb) < WLS) wl[rb] = 1'b1;
  end
endmodule
