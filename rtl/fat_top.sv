// fat_top -- the ternary-weight in-memory accelerator.
//
// NUM_CMA Computing Memory Arrays (default 4096 arrays of 512 x 256 bits,
// 64 MiB, with 32 two-bit weight registers each, 128K in all) share one
// instruction bus from the host. An instruction goes to the array h_sel, or
// to every array when h_bcast is set (used to start a sparse dot product in
// all arrays at once). After a READOUT, each array holds its column results;
// the collect port walks the internal result bus over a group of arrays
// (cma_accumulator), adds their partial dot products column by column, passes
// the sums through the DPU (ReLU, batch normalisation) and, if store_en,
// writes the resulting feature-map vector back into array store_sel at row
// store_row (ofm_store). The write-back uses the instruction bus, so the host
// port is not ready while it runs.
//
// Interface timing: h_ready is high when every array and the write-back are
// idle; an instruction is taken when h_valid && h_ready. The READ output of
// the last addressed array appears on rd_row with rd_valid. c_start is taken
// when !c_busy; ofm_valid pulses with the DPU output.
//
// Lint: rst_n is reported as used both asynchronously and synchronously
// (SYNCASYNCNET) because the memory controller's assertion samples it in
// "disable iff"; no flip-flop uses it synchronously.
module fat_top
  import fat_pkg::*;
#(
  parameter int unsigned NUM_CMA   = fat_pkg::NUM_CMA_DEF,
  parameter int unsigned ROWS      = fat_pkg::ROWS_DEF,
  parameter int unsigned COLS      = fat_pkg::COLS_DEF,
  parameter int unsigned MH        = 32,
  parameter int unsigned ACT_BITS  = fat_pkg::ACT_BITS_DEF,
  parameter int unsigned PSUM_BITS = fat_pkg::PSUM_BITS_DEF,
  parameter int unsigned ACC_W     = 32,
  localparam int unsigned CIW      = (NUM_CMA <= 1) ? 1 : $clog2(NUM_CMA),
  localparam int unsigned OUT_W    = PSUM_BITS + $clog2(COLS)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // host instruction port
  input  logic                       h_valid,
  output logic                       h_ready,
  input  logic                       h_bcast,
  input  logic [CIW-1:0]             h_sel,
  input  cma_cmd_t                   h_cmd,
  input  logic [COLS-1:0]            h_wdata,
  input  logic [MH-1:0][1:0]         h_w,
  output logic                       rd_valid,
  output logic [COLS-1:0]            rd_row,
  // collect / DPU / write-back port
  input  logic                       c_start,
  input  logic [CIW-1:0]             c_base,
  input  logic [CIW:0]               c_count,
  input  logic                       relu_en,
  input  logic signed [ACC_W-1:0]    bn_mean,
  input  logic signed [15:0]         bn_scale,
  input  logic [4:0]                 bn_shift,
  input  logic                       store_en,
  input  logic [CIW-1:0]             store_sel,
  input  row_addr_t                  store_row,
  output logic                       c_busy,
  output logic                       ofm_valid,
  output logic signed [ACT_BITS-1:0] ofm [COLS]
);
  logic [NUM_CMA-1:0]      cma_ready, cma_valid, cma_outv;
  logic [COLS-1:0]         cma_out_row [NUM_CMA];
  logic signed [OUT_W-1:0] cma_res [NUM_CMA][COLS];

  // write-back
  logic                    st_busy, st_valid, st_start;
  logic [CIW-1:0]          st_sel;
  cma_cmd_t                st_cmd;
  logic [COLS-1:0]         st_data;

  // bus into the arrays
  cma_cmd_t                bus_cmd;
  logic [COLS-1:0]         bus_wdata;
  logic                    bus_go, all_ready;
  logic [CIW-1:0]          rd_sel;

  assign all_ready = &cma_ready;
  assign h_ready   = all_ready && !st_busy;

  always_comb begin
    if (st_busy) begin
      bus_cmd   = st_cmd;
      bus_wdata = st_data;
      bus_go    = st_valid && all_ready;
    end else begin
      bus_cmd   = h_cmd;
      bus_wdata = h_wdata;
      bus_go    = h_valid && h_ready;
    end
    for (int i = 0; i < NUM_CMA; i++)
      cma_valid[i] = bus_go && (st_busy ? (st_sel == CIW'(i))
                                        : (h_bcast || h_sel == CIW'(i)));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                         rd_sel <= '0;
    else if (h_valid && h_ready && !h_bcast) rd_sel <= h_sel;
  end
  assign rd_valid = cma_outv[rd_sel];
  assign rd_row   = cma_out_row[rd_sel];

  for (genvar i = 0; i < NUM_CMA; i++) begin : g_cma
    logic unused_done, unused_res_valid;
    cma #(.ROWS(ROWS), .COLS(COLS), .MH(MH), .ACT_BITS(ACT_BITS), .PSUM_BITS(PSUM_BITS)) u_cma (
      .clk, .rst_n,
      .cmd_valid(cma_valid[i]), .cmd_ready(cma_ready[i]), .cmd(bus_cmd),
      .cmd_wdata(bus_wdata), .cmd_w(h_w),
      .out_valid(cma_outv[i]), .out_row(cma_out_row[i]),
      .res(cma_res[i]), .res_valid(unused_res_valid), .done(unused_done)
    );
  end

  // internal result bus and cross-array adder
  logic [CIW-1:0]          acc_sel;
  logic signed [ACC_W-1:0] acc [COLS];
  logic                    acc_valid, acc_busy;
  cma_accumulator #(.NUM_CMA(NUM_CMA), .COLS(COLS), .IN_W(OUT_W), .ACC_W(ACC_W)) u_acc (
    .clk, .rst_n, .start(c_start && !c_busy), .base(c_base), .count(c_count),
    .busy(acc_busy), .bus_sel(acc_sel), .bus_data(cma_res[acc_sel]),
    .acc, .acc_valid
  );

  // DPU parameters and write-back target are sampled at c_start
  logic                    relu_q, store_q;
  logic signed [ACC_W-1:0] mean_q;
  logic signed [15:0]      scale_q;
  logic [4:0]              shift_q;
  logic [CIW-1:0]          ssel_q;
  row_addr_t               srow_q;
  logic                    dpu_pending;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      relu_q <= 1'b0; store_q <= 1'b0; mean_q <= '0; scale_q <= '0; shift_q <= '0;
      ssel_q <= '0; srow_q <= '0; dpu_pending <= 1'b0;
    end else begin
      if (c_start && !c_busy) begin
        relu_q <= relu_en; store_q <= store_en; mean_q <= bn_mean; scale_q <= bn_scale;
        shift_q <= bn_shift; ssel_q <= store_sel; srow_q <= store_row;
      end
      if (acc_valid)      dpu_pending <= 1'b1;
      else if (ofm_valid) dpu_pending <= 1'b0;
    end
  end

  dpu #(.COLS(COLS), .IN_W(ACC_W), .SCALE_W(16), .ACT_BITS(ACT_BITS)) u_dpu (
    .clk, .rst_n, .in_valid(acc_valid), .in_vec(acc), .relu_en(relu_q),
    .bn_mean(mean_q), .bn_scale(scale_q), .bn_shift(shift_q),
    .out_valid(ofm_valid), .out_vec(ofm)
  );

  assign st_start = ofm_valid && store_q;
  ofm_store #(.NUM_CMA(NUM_CMA), .COLS(COLS), .ACT_BITS(ACT_BITS)) u_store (
    .clk, .rst_n, .start(st_start), .vec(ofm), .cma_sel(ssel_q), .base_row(srow_q),
    .busy(st_busy), .wr_valid(st_valid), .wr_ready(all_ready), .wr_sel(st_sel),
    .wr_cmd(st_cmd), .wr_data(st_data)
  );

  assign c_busy = acc_busy || dpu_pending || acc_valid || st_start || st_busy;
endmodule
