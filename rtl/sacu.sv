// sacu -- Sparse Addition Control Unit of one CMA's memory controller.
//
// Holds MH ternary weights (2-bit {sign, data} registers, one per activation
// slot) and turns them into a sequence of bit-serial vector operations that
// compute, in every column at once, the dot product of the column's
// activations with the weight vector. Following the paper's three stages:
//   1. add all activations whose weight is +1 into a partial sum P,
//   2. add all activations whose weight is -1 into a partial sum Q,
//   3. P - Q as NOT Q followed by an ADD whose first carry-in is 1.
// Rows whose weight has data bit 0 are never activated, so zero weights cost
// no cycles: the next non-zero weight is found by a priority encoder in the
// same cycle. Binary weights (+1/-1 only) run through the same path.
//
// Memory layout (this design's reading of the paper's reserved intervals):
// slot i holds activation i in rows i*STRIDE .. +ACT_BITS-1 and its interval
// in the next PSUM_BITS rows. The running sum after adding activation i is
// written into interval i, so the writes of accumulation spread over all
// intervals instead of hitting one fixed row group. A single operand is used
// in place (no copy); an empty stage uses the all-zero reference row. The
// result of stage 3 goes to the interval of the last -1 operand. Sums are
// PSUM_BITS wide and wrap modulo 2**PSUM_BITS, since the paper makes an
// interval exactly one operand high.
//
// Interface: w_load writes w_in into the registers (any time when idle).
// start (when idle) begins a dot product; operations leave on vop/vop_valid
// and are taken when vop_ready. done pulses once the last operation has
// finished (eng_idle); res_base/res_len then give the result's rows.
// Cost with PSUM_BITS = B, p = #(+1), n = #(-1): the number of operations is
//   V = max(p-1,0) + max(n-1,0) + (n>0 ? 2 : 0)
// and, with an engine that takes back-to-back operations, the cycles from
// start to done are B*V plus 3 to 7 control cycles (stage changes that are
// not hidden under a running operation), whatever the number of zero weights.
// Lint note: loc_len() looks only at the kind of an operand location, not its
// slot index, so the linter reports the index bits of its argument unused.
module sacu
  import fat_pkg::*;
#(
  parameter int unsigned ROWS      = fat_pkg::ROWS_DEF,
  parameter int unsigned MH        = 32,
  parameter int unsigned ACT_BITS  = fat_pkg::ACT_BITS_DEF,
  parameter int unsigned PSUM_BITS = fat_pkg::PSUM_BITS_DEF
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                w_load,
  input  logic [MH-1:0][1:0]  w_in,
  input  logic                start,
  output logic                busy,
  output logic                done,
  output vop_t                vop,
  output logic                vop_valid,
  input  logic                vop_ready,
  input  logic                eng_idle,
  output row_addr_t           res_base,
  output logic [5:0]          res_len,
  output logic [MH-1:0][1:0]  w_q
);
  localparam int unsigned STRIDE = ACT_BITS + PSUM_BITS;
  localparam int unsigned IW = (MH <= 1) ? 1 : $clog2(MH);

  typedef enum logic [1:0] {L_ZERO, L_ACT, L_IVL} loc_kind_e;
  typedef struct packed {
    loc_kind_e    kind;
    logic [IW-1:0] idx;
  } loc_t;

  typedef enum logic [2:0] {S_IDLE, S_POS, S_NEG, S_NOT, S_SUB, S_FIN} state_e;
  state_e state;

  logic [MH-1:0] mask_pos, mask_neg;
  loc_t          p_loc, q_loc, r_loc;
  logic [IW-1:0] q_last;

  function automatic row_addr_t loc_base(loc_t l);
    unique case (l.kind)
      L_ACT:   return row_addr_t'(32'(l.idx) * STRIDE);
      L_IVL:   return row_addr_t'(32'(l.idx) * STRIDE + ACT_BITS);
      default: return row_addr_t'(ROWS);
    endcase
  endfunction
  function automatic logic [5:0] loc_len(loc_t l);
    unique case (l.kind)
      L_ACT:   return 6'(ACT_BITS);
      L_IVL:   return 6'(PSUM_BITS);
      default: return 6'd1;
    endcase
  endfunction

  // priority encoder: lowest set bit
  function automatic logic [IW-1:0] first_one(logic [MH-1:0] m);
    logic [IW-1:0] r;
    r = '0;
    for (int i = MH - 1; i >= 0; i--) if (m[i]) r = IW'(i);
    return r;
  endfunction

  logic [MH-1:0] cur_mask;
  logic [IW-1:0] nxt;
  loc_t          acc_loc;
  assign cur_mask = (state == S_NEG) ? mask_neg : mask_pos;
  assign nxt      = first_one(cur_mask);
  assign acc_loc  = (state == S_NEG) ? q_loc : p_loc;

  always_comb begin
    vop       = '0;
    vop_valid = 1'b0;
    vop.nbits = 6'(PSUM_BITS);
    unique case (state)
      S_POS, S_NEG: begin
        vop.op     = SA_ADD;
        vop.base_a = loc_base(acc_loc);
        vop.len_a  = loc_len(acc_loc);
        vop.base_b = loc_base('{L_ACT, nxt});
        vop.len_b  = 6'(ACT_BITS);
        vop.base_d = loc_base('{L_IVL, nxt});
        vop.wb     = 1'b1;
        vop_valid  = (cur_mask != '0) && (acc_loc.kind != L_ZERO);
      end
      S_NOT: begin
        vop.op     = SA_NOT;
        vop.base_a = loc_base(q_loc);
        vop.len_a  = loc_len(q_loc);
        vop.base_b = row_addr_t'(ROWS + 1);   // all-ones row
        vop.len_b  = 6'd1;
        vop.base_d = loc_base('{L_IVL, q_last});
        vop.wb     = 1'b1;
        vop_valid  = (q_loc.kind != L_ZERO);
      end
      S_SUB: begin
        vop.op     = SA_ADD;
        vop.cin    = 1'b1;
        vop.base_a = loc_base(p_loc);
        vop.len_a  = loc_len(p_loc);
        vop.base_b = loc_base('{L_IVL, q_last});
        vop.len_b  = 6'(PSUM_BITS);
        vop.base_d = loc_base('{L_IVL, q_last});
        vop.wb     = 1'b1;
        vop_valid  = 1'b1;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      w_q      <= '0;
      mask_pos <= '0;
      mask_neg <= '0;
      p_loc    <= '{L_ZERO, '0};
      q_loc    <= '{L_ZERO, '0};
      r_loc    <= '{L_ZERO, '0};
      q_last   <= '0;
      done     <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (w_load) w_q <= w_in;
          if (start) begin
            for (int i = 0; i < MH; i++) begin
              mask_pos[i] <= w_q[i][0] & ~w_q[i][1];
              mask_neg[i] <= w_q[i][0] &  w_q[i][1];
            end
            p_loc <= '{L_ZERO, '0};
            q_loc <= '{L_ZERO, '0};
            state <= S_POS;
          end
        end
        S_POS, S_NEG: begin
          if (cur_mask == '0) begin
            state <= (state == S_POS) ? S_NEG : S_NOT;
          end else if (acc_loc.kind == L_ZERO) begin
            // first operand of the stage is used where it lies
            if (state == S_POS) begin p_loc <= '{L_ACT, nxt}; mask_pos[nxt] <= 1'b0; end
            else begin q_loc <= '{L_ACT, nxt}; mask_neg[nxt] <= 1'b0; q_last <= nxt; end
          end else if (vop_ready) begin
            if (state == S_POS) begin p_loc <= '{L_IVL, nxt}; mask_pos[nxt] <= 1'b0; end
            else begin q_loc <= '{L_IVL, nxt}; mask_neg[nxt] <= 1'b0; q_last <= nxt; end
          end
        end
        S_NOT: begin
          if (q_loc.kind == L_ZERO) begin
            r_loc <= p_loc;
            state <= S_FIN;
          end else if (vop_ready) begin
            state <= S_SUB;
          end
        end
        S_SUB: begin
          if (vop_ready) begin
            r_loc <= '{L_IVL, q_last};
            state <= S_FIN;
          end
        end
        S_FIN: begin
          if (eng_idle) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy     = (state != S_IDLE);
  assign res_base = loc_base(r_loc);
  assign res_len  = loc_len(r_loc);

  initial begin
    assert (MH * STRIDE <= ROWS) else $error("sacu: MH slots do not fit in ROWS");
  end
endmodule
