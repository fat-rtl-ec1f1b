// ofm_store -- writes an output-feature-map vector from the DPU back into a
// memory array, where it becomes the next layer's activations.
//
// The arrays store numbers column-major: bit k of every column's value lives
// in row base+k. So a vector of COLS signed ACT_BITS values becomes ACT_BITS
// row writes, row base+k carrying bit k of each lane. The block issues those
// writes as WRITE instructions on the array instruction bus, one per
// accepted cycle, to array cma_sel. Rearranging the outputs into the next
// layer's Img2Col layout is left to the host. Issuing plain WRITE
// instructions is this design's choice of how the write-back is done.
//
// Timing: start (when !busy) latches the vector; ACT_BITS instructions
// follow, each held until wr_ready.
module ofm_store
  import fat_pkg::*;
#(
  parameter int unsigned NUM_CMA  = fat_pkg::NUM_CMA_DEF,
  parameter int unsigned COLS     = fat_pkg::COLS_DEF,
  parameter int unsigned ACT_BITS = fat_pkg::ACT_BITS_DEF,
  localparam int unsigned CIW     = (NUM_CMA <= 1) ? 1 : $clog2(NUM_CMA)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  input  logic signed [ACT_BITS-1:0] vec [COLS],
  input  logic [CIW-1:0]             cma_sel,
  input  row_addr_t                  base_row,
  output logic                       busy,
  output logic                       wr_valid,
  input  logic                       wr_ready,
  output logic [CIW-1:0]             wr_sel,
  output cma_cmd_t                   wr_cmd,
  output logic [COLS-1:0]            wr_data
);
  logic [ACT_BITS-1:0] v_q [COLS];
  row_addr_t           base_q;
  logic [5:0]          k;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      k      <= '0;
      wr_sel <= '0;
      base_q <= '0;
      for (int c = 0; c < COLS; c++) v_q[c] <= '0;
    end else if (!busy) begin
      if (start) begin
        busy   <= 1'b1;
        k      <= '0;
        wr_sel <= cma_sel;
        base_q <= base_row;
        for (int c = 0; c < COLS; c++) v_q[c] <= vec[c];
      end
    end else if (wr_ready) begin
      if (32'(k) == ACT_BITS - 1) busy <= 1'b0;
      k <= k + 6'd1;
    end
  end

  always_comb begin
    wr_valid      = busy;
    wr_cmd        = '0;
    wr_cmd.cmd    = CMD_WRITE;
    wr_cmd.row_d  = base_q + row_addr_t'(k);
    wr_cmd.col_lo = '0;
    wr_cmd.col_hi = 16'(COLS - 1);
    for (int c = 0; c < COLS; c++) wr_data[c] = v_q[c][k[$clog2(ACT_BITS)-1:0]];
  end
endmodule
