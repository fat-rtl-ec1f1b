// cma -- one Computing Memory Array: memory controller, row decoder, column
// decoder / write driver, STT-MRAM array and the bank of sense amplifiers,
// connected as in the paper (word lines from the row decoder, bit lines from
// the column decoder, source lines into the sense amplifiers, SA output back
// to the write driver for write-back of results).
//
// The instruction port and the result outputs are those of
// memory_controller; see there for the instruction set and timing.
module cma
  import fat_pkg::*;
#(
  parameter int unsigned ROWS      = fat_pkg::ROWS_DEF,
  parameter int unsigned COLS      = fat_pkg::COLS_DEF,
  parameter int unsigned MH        = 32,
  parameter int unsigned ACT_BITS  = fat_pkg::ACT_BITS_DEF,
  parameter int unsigned PSUM_BITS = fat_pkg::PSUM_BITS_DEF,
  localparam int unsigned OUT_W    = PSUM_BITS + $clog2(COLS)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     cmd_valid,
  output logic                     cmd_ready,
  input  cma_cmd_t                 cmd,
  input  logic [COLS-1:0]          cmd_wdata,
  input  logic [MH-1:0][1:0]       cmd_w,
  output logic                     out_valid,
  output logic [COLS-1:0]          out_row,
  output logic signed [OUT_W-1:0]  res [COLS],
  output logic                     res_valid,
  output logic                     done
);
  localparam int unsigned RAW = $clog2(ROWS + 2);
  localparam int unsigned AW  = $clog2(ROWS);
  localparam int unsigned CAW = $clog2(COLS);

  logic [RAW-1:0]   ra, rb;
  logic             ra_en, rb_en, we;
  logic [CAW-1:0]   col_lo, col_hi;
  logic [AW-1:0]    wrow;
  logic [COLS-1:0]  wdata, bl_en, sl_ge1, sl_ge2, sa_out, unused_carry_q;
  logic [ROWS+1:0]  wl;
  sa_ctrl_t         sa_ctrl;
  logic             carry_load, carry_init, carry_en;

  memory_controller #(.ROWS(ROWS), .COLS(COLS), .MH(MH), .ACT_BITS(ACT_BITS),
                      .PSUM_BITS(PSUM_BITS)) u_mc (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .cmd_wdata, .cmd_w,
    .ra, .ra_en, .rb, .rb_en, .col_lo, .col_hi, .we, .wrow, .wdata,
    .sa_ctrl, .carry_load, .carry_init, .carry_en, .sa_out,
    .out_valid, .out_row, .res, .res_valid, .done
  );

  mrad #(.ROWS(ROWS)) u_mrad (.ra, .ra_en, .rb, .rb_en, .wl);
  mcad #(.COLS(COLS)) u_mcad (.col_lo, .col_hi, .bl_en);

  mram_array #(.ROWS(ROWS), .COLS(COLS)) u_array (
    .clk, .wl, .bl_en, .we, .wrow, .wdata, .sl_ge1, .sl_ge2
  );

  sense_amp #(.COLS(COLS)) u_sa (
    .clk, .rst_n, .sl_ge1, .sl_ge2, .ctrl(sa_ctrl),
    .carry_load, .carry_init, .carry_en, .out(sa_out), .carry_q(unused_carry_q)
  );
endmodule
