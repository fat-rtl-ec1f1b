// dpu -- Digital Processing Unit: activation function and batch
// normalisation applied to a vector of convolution results.
//
// For every lane:  r = relu_en ? max(x, 0) : x                 (ReLU)
//                  z = ((r - bn_mean) * bn_scale) >>> bn_shift  (BN)
//                  y = z saturated to a signed ACT_BITS integer
// The paper gives ReLU and BN(Y) = (Y - E[Y]) / sqrt(Var[Y] + eps) and the
// order "activation function, then batch normalisation"; it keeps the DPU of
// earlier work without describing its insides. Here BN is reduced to a
// per-channel fixed-point scale 2**bn_shift / sqrt(Var+eps) that the host
// precomputes, and the output is saturated to the activation width so it can
// be stored back into a memory array as the next layer's input. Those are this
// design's choices. There is no weight quantiser, as in the paper.
//
// Timing: one register stage; out_valid follows in_valid by one cycle and
// the parameters are sampled together with in_vec.
module dpu #(
  parameter int unsigned COLS     = fat_pkg::COLS_DEF,
  parameter int unsigned IN_W     = 32,
  parameter int unsigned SCALE_W  = 16,
  parameter int unsigned ACT_BITS = fat_pkg::ACT_BITS_DEF
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        in_valid,
  input  logic signed [IN_W-1:0]      in_vec [COLS],
  input  logic                        relu_en,
  input  logic signed [IN_W-1:0]      bn_mean,
  input  logic signed [SCALE_W-1:0]   bn_scale,
  input  logic [4:0]                  bn_shift,
  output logic                        out_valid,
  output logic signed [ACT_BITS-1:0]  out_vec [COLS]
);
  localparam int unsigned PW = IN_W + 1 + SCALE_W;
  localparam logic signed [PW-1:0] MAXV = PW'( (2 ** (ACT_BITS - 1)) - 1);
  localparam logic signed [PW-1:0] MINV = -PW'(2 ** (ACT_BITS - 1));

  function automatic logic signed [ACT_BITS-1:0] lane(logic signed [IN_W-1:0] x,
      logic re, logic signed [IN_W-1:0] m, logic signed [SCALE_W-1:0] s, logic [4:0] sh);
    logic signed [IN_W-1:0] r;
    logic signed [PW-1:0]   d, z;
    r = (re && x < 0) ? '0 : x;
    d = PW'(r) - PW'(m);
    z = (d * PW'(s)) >>> sh;
    if (z > MAXV)      return ACT_BITS'(MAXV);
    else if (z < MINV) return ACT_BITS'(MINV);
    else               return ACT_BITS'(z);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int c = 0; c < COLS; c++) out_vec[c] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid)
        for (int c = 0; c < COLS; c++)
          out_vec[c] <= lane(in_vec[c], relu_en, bn_mean, bn_scale, bn_shift);
    end
  end
endmodule
