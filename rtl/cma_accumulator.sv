// cma_accumulator -- internal result bus and cross-array adder.
//
// Under the combined-stationary mapping a filter of length J = C*KH*KW is
// split over J/MH arrays that hold the same output points in aligned
// columns, so each array's column results are partial dot products that must
// be added (the adder in the paper's workflow figure, between the arrays and
// the DPU). This block walks the bus over count arrays starting at base, one
// array per cycle (bus_sel selects which array drives bus_data), adds each
// column into a wide accumulator and then presents the finished vector to the
// DPU with acc_valid for one cycle. A one-array-per-cycle shared bus is this
// design's choice; the paper only says results travel on internal buses.
//
// Timing: start when !busy; count+1 cycles later acc_valid pulses.
module cma_accumulator #(
  parameter int unsigned NUM_CMA = fat_pkg::NUM_CMA_DEF,
  parameter int unsigned COLS    = fat_pkg::COLS_DEF,
  parameter int unsigned IN_W    = 16,
  parameter int unsigned ACC_W   = 32,
  localparam int unsigned CIW    = (NUM_CMA <= 1) ? 1 : $clog2(NUM_CMA)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic [CIW-1:0]           base,
  input  logic [CIW:0]             count,
  output logic                     busy,
  output logic [CIW-1:0]           bus_sel,
  input  logic signed [IN_W-1:0]   bus_data [COLS],
  output logic signed [ACC_W-1:0]  acc [COLS],
  output logic                     acc_valid
);
  logic [CIW:0] left;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      bus_sel   <= '0;
      left      <= '0;
      acc_valid <= 1'b0;
      for (int c = 0; c < COLS; c++) acc[c] <= '0;
    end else begin
      acc_valid <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy    <= 1'b1;
          bus_sel <= base;
          left    <= count;
          for (int c = 0; c < COLS; c++) acc[c] <= '0;
        end
      end else if (left == '0) begin
        busy      <= 1'b0;
        acc_valid <= 1'b1;
      end else begin
        for (int c = 0; c < COLS; c++) acc[c] <= acc[c] + ACC_W'(bus_data[c]);
        bus_sel <= bus_sel + 1'b1;
        left    <= left - 1'b1;
      end
    end
  end
endmodule
