// memory_controller -- Memory Controller (MC) of one Computing Memory Array.
//
// Takes instructions from the host and drives the row decoder, the column
// decoder / write driver and the sense amplifiers. It contains the paper's
// Operation Decoder (op_decoder), the Sparse Addition Control Unit (sacu) and
// its reduction unit (reduction_unit), plus a bit-serial engine that all
// multi-row operations share.
//
// Instructions (fat_pkg::cmd_e), one accepted when cmd_ready:
//   WRITE    row_d <= wdata (columns col_lo..col_hi)       1 busy cycle
//   READ     OUT <= row_a                                   1 engine step
//   BOOL     OUT <= row_a op row_b (NOT uses the ones row), optional write to row_d
//   ADD      rows row_a.., row_b.. -> row_d.., nbits steps, carry preset cin
//   SUB      row_d.. <= NOT row_b..; then row_d.. <= row_a.. + row_d.. + 1
//   LOAD_W   SACU weight registers <= weights
//   DOT      sparse ternary dot product in all enabled columns
//   READOUT  read the last dot-product result into the reduction unit
// The three modes of the paper (plain memory, Boolean/addition IMC, ternary
// accelerator) are these instructions; the encoding is this design's own.
//
// Bit-serial engine: a vector operation (fat_pkg::vop_t) of nbits steps
// raises, in step k, the rows base_a+min(k,len_a-1) and base_b+min(k,len_b-1)
// together, lets the SA compute, and writes OUT into base_d+k. Each step is
// one clock cycle (sensing, combining and write-back of one bit, the paper's
// t_Read + t_SUM + t_Write). The carry latch is preset in the cycle an
// operation is accepted, and a new operation may be accepted in the last step
// of the previous one, so back-to-back N-bit additions take N cycles each.
//
// Lint notes: the latched instruction cq is only partly read after decode
// (fields not used by the instruction in progress), and the engine never
// reads cur.cin because the carry is preset from the incoming operation in
// its accept cycle; the linter reports those bits as unused. The SACU's busy
// and weight-register outputs are left unused here (unused_* names). The
// assertion's "disable iff (!rst_n)" makes the linter see rst_n as both an
// asynchronous reset and a synchronous signal (SYNCASYNCNET); only the
// assertion samples it synchronously.
module memory_controller
  import fat_pkg::*;
#(
  parameter int unsigned ROWS      = fat_pkg::ROWS_DEF,
  parameter int unsigned COLS      = fat_pkg::COLS_DEF,
  parameter int unsigned MH        = 32,
  parameter int unsigned ACT_BITS  = fat_pkg::ACT_BITS_DEF,
  parameter int unsigned PSUM_BITS = fat_pkg::PSUM_BITS_DEF,
  localparam int unsigned RAW   = $clog2(ROWS + 2),
  localparam int unsigned AW    = $clog2(ROWS),
  localparam int unsigned CAW   = $clog2(COLS),
  localparam int unsigned OUT_W = PSUM_BITS + $clog2(COLS)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // host instruction port
  input  logic                      cmd_valid,
  output logic                      cmd_ready,
  input  cma_cmd_t                  cmd,
  input  logic [COLS-1:0]           cmd_wdata,
  input  logic [MH-1:0][1:0]        cmd_w,
  // row decoder
  output logic [RAW-1:0]            ra,
  output logic                      ra_en,
  output logic [RAW-1:0]            rb,
  output logic                      rb_en,
  // column decoder / write driver
  output logic [CAW-1:0]            col_lo,
  output logic [CAW-1:0]            col_hi,
  output logic                      we,
  output logic [AW-1:0]             wrow,
  output logic [COLS-1:0]           wdata,
  // sense amplifiers
  output sa_ctrl_t                  sa_ctrl,
  output logic                      carry_load,
  output logic                      carry_init,
  output logic                      carry_en,
  input  logic [COLS-1:0]           sa_out,
  // results
  output logic                      out_valid,
  output logic [COLS-1:0]           out_row,
  output logic signed [OUT_W-1:0]   res [COLS],
  output logic                      res_valid,
  output logic                      done
);
  typedef enum logic [2:0] {M_IDLE, M_WRITE, M_VOPS, M_DOT} mstate_e;
  mstate_e state;

  cma_cmd_t      cq;
  logic [COLS-1:0] wdata_q;
  logic [CAW-1:0] lo_q, hi_q;
  vop_t          vq [2];
  logic [1:0]    v_cnt, v_idx;

  // engine
  logic          act;
  vop_t          cur;
  logic [5:0]    k;
  logic          eng_ready, eng_idle, accept;
  vop_t          vop_in;
  logic          vop_in_valid;

  // SACU
  vop_t          s_vop;
  logic          s_vop_valid, unused_s_busy, s_done, s_start, s_wload;
  row_addr_t     s_res_base;
  logic [5:0]    s_res_len;
  logic [MH-1:0][1:0] unused_s_wq;

  assign eng_idle  = !act;
  assign eng_ready = !act || (k == cur.nbits - 6'd1);
  assign cmd_ready = (state == M_IDLE);

  assign s_start = cmd_valid && cmd_ready && (cmd.cmd == CMD_DOT);
  assign s_wload = cmd_valid && cmd_ready && (cmd.cmd == CMD_LOAD_W);

  sacu #(.ROWS(ROWS), .MH(MH), .ACT_BITS(ACT_BITS), .PSUM_BITS(PSUM_BITS)) u_sacu (
    .clk, .rst_n, .w_load(s_wload), .w_in(cmd_w), .start(s_start),
    .busy(unused_s_busy), .done(s_done), .vop(s_vop), .vop_valid(s_vop_valid),
    .vop_ready(eng_ready && state == M_DOT), .eng_idle,
    .res_base(s_res_base), .res_len(s_res_len), .w_q(unused_s_wq)
  );

  always_comb begin
    if (state == M_DOT) begin
      vop_in       = s_vop;
      vop_in_valid = s_vop_valid;
    end else begin
      vop_in       = vq[v_idx[0]];
      vop_in_valid = (state == M_VOPS) && (v_idx < v_cnt);
    end
  end
  assign accept = vop_in_valid && eng_ready;

  function automatic vop_t mk_vop(sa_op_e op, row_addr_t a, logic [5:0] la, row_addr_t b,
                                  logic [5:0] lb, row_addr_t d, logic [5:0] n, logic ci,
                                  logic w, logic r);
    vop_t v;
    v.op = op; v.base_a = a; v.len_a = la; v.base_b = b; v.len_b = lb;
    v.base_d = d; v.nbits = n; v.cin = ci; v.wb = w; v.to_red = r;
    return v;
  endfunction

  // ---------------- instruction sequencing ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= M_IDLE;
      cq      <= '0;
      wdata_q <= '0;
      lo_q    <= '0;
      hi_q    <= '1;
      vq[0]   <= '0;
      vq[1]   <= '0;
      v_cnt   <= '0;
      v_idx   <= '0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        M_IDLE: if (cmd_valid) begin
          cq      <= cmd;
          wdata_q <= cmd_wdata;
          v_idx   <= '0;
          if (cmd.cmd != CMD_LOAD_W && cmd.cmd != CMD_NOP) begin
            lo_q <= CAW'(cmd.col_lo);
            hi_q <= CAW'(cmd.col_hi);
          end
          unique case (cmd.cmd)
            CMD_WRITE: state <= M_WRITE;
            CMD_READ: begin
              vq[0] <= mk_vop(SA_READ, cmd.row_a, 6'd1, cmd.row_a, 6'd1, cmd.row_a, 6'd1, 1'b0, 1'b0, 1'b0);
              v_cnt <= 2'd1; state <= M_VOPS;
            end
            CMD_BOOL: begin
              vq[0] <= mk_vop(cmd.op, cmd.row_a, 6'd1,
                              (cmd.op == SA_NOT) ? row_addr_t'(ROWS + 1) : cmd.row_b, 6'd1,
                              cmd.row_d, 6'd1, 1'b0, cmd.wb, 1'b0);
              v_cnt <= 2'd1; state <= M_VOPS;
            end
            CMD_ADD: begin
              vq[0] <= mk_vop(SA_ADD, cmd.row_a, cmd.nbits, cmd.row_b, cmd.nbits, cmd.row_d,
                              cmd.nbits, cmd.cin, 1'b1, 1'b0);
              v_cnt <= 2'd1; state <= M_VOPS;
            end
            CMD_SUB: begin
              vq[0] <= mk_vop(SA_NOT, cmd.row_b, cmd.nbits, row_addr_t'(ROWS + 1), 6'd1, cmd.row_d,
                              cmd.nbits, 1'b0, 1'b1, 1'b0);
              vq[1] <= mk_vop(SA_ADD, cmd.row_a, cmd.nbits, cmd.row_d, cmd.nbits, cmd.row_d,
                              cmd.nbits, 1'b1, 1'b1, 1'b0);
              v_cnt <= 2'd2; state <= M_VOPS;
            end
            CMD_READOUT: begin
              vq[0] <= mk_vop(SA_READ, s_res_base, s_res_len, s_res_base, s_res_len, s_res_base,
                              6'(PSUM_BITS), 1'b0, 1'b0, 1'b1);
              v_cnt <= 2'd1; state <= M_VOPS;
            end
            CMD_DOT:    state <= M_DOT;
            default:    done <= 1'b1;   // LOAD_W and NOP finish at once
          endcase
        end
        M_WRITE: begin
          done  <= 1'b1;
          state <= M_IDLE;
        end
        M_VOPS: begin
          if (accept) v_idx <= v_idx + 2'd1;
          if (v_idx == v_cnt && eng_idle) begin
            done  <= 1'b1;
            state <= M_IDLE;
          end
        end
        M_DOT: if (s_done) begin
          done  <= 1'b1;
          state <= M_IDLE;
        end
        default: state <= M_IDLE;
      endcase
    end
  end

  // ---------------- bit-serial engine ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act <= 1'b0;
      cur <= '0;
      k   <= '0;
    end else if (accept) begin
      act <= 1'b1;
      cur <= vop_in;
      k   <= '0;
    end else if (act) begin
      if (k == cur.nbits - 6'd1) act <= 1'b0;
      else                       k   <= k + 6'd1;
    end
  end

  function automatic row_addr_t op_row(row_addr_t base, logic [5:0] len, logic [5:0] kk);
    return base + ((kk < len) ? row_addr_t'(kk) : row_addr_t'(len - 6'd1));
  endfunction

  sa_op_e eng_op;
  assign eng_op = act ? cur.op : SA_READ;
  op_decoder u_dec (.op(eng_op), .ctrl(sa_ctrl));

  always_comb begin
    ra    = RAW'(op_row(cur.base_a, cur.len_a, k));
    rb    = RAW'(op_row(cur.base_b, cur.len_b, k));
    ra_en = act;
    rb_en = act && (cur.op != SA_READ);
    col_lo = lo_q;
    col_hi = hi_q;
    carry_load = accept;
    carry_init = vop_in.cin;
    carry_en   = act && (cur.op == SA_ADD);
    if (state == M_WRITE) begin
      we    = 1'b1;
      wrow  = AW'(cq.row_d);
      wdata = wdata_q;
    end else begin
      we    = act && cur.wb;
      wrow  = AW'(cur.base_d + row_addr_t'(k));
      wdata = sa_out;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_row   <= '0;
    end else begin
      out_valid <= act;
      if (act) out_row <= sa_out;
    end
  end

  reduction_unit #(.COLS(COLS), .PSUM_BITS(PSUM_BITS)) u_red (
    .clk, .rst_n,
    .clear(cmd_valid && cmd_ready && cmd.cmd == CMD_READOUT),
    .red_log2(cmd.red_log2),
    .bit_valid(act && cur.to_red), .bit_k(k), .bit_row(sa_out),
    .y(res), .y_valid(res_valid)
  );

  // A destination row must be a data row.
  a_wrow_ok: assert property (@(posedge clk) disable iff (!rst_n)
                              (act && cur.wb) |-> (cur.base_d + row_addr_t'(k) < row_addr_t'(ROWS)));
endmodule
