// tb_cma -- one Computing Memory Array exercised in all three modes against
// a reference model kept in the testbench:
//  * memory: WRITE (full and column-masked) and READ;
//  * in-memory computing: NOT, AND, NAND, OR, XOR with and without write-back,
//    nbits-bit ADD (must take nbits engine cycles) and SUB;
//  * ternary accelerator: LOAD_W, DOT and READOUT with column grouping, for
//    random, all-zero and binary weight sets; results must equal the dot
//    product modulo 2**PSUM_BITS and the busy time must not depend on the
//    number of zero weights.
module tb_cma;
  import fat_pkg::*;
  localparam int ROWS = 64, COLS = 16, MH = 4, AB = 8, PB = 8, STRIDE = AB + PB;
  localparam int OUT_W = PB + 4;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready, out_valid, res_valid, done;
  cma_cmd_t cmd;
  logic [COLS-1:0] wdata, out_row;
  logic [MH-1:0][1:0] w;
  logic signed [OUT_W-1:0] res [COLS];
  cma #(.ROWS(ROWS), .COLS(COLS), .MH(MH), .ACT_BITS(AB), .PSUM_BITS(PB)) dut (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .cmd_wdata(wdata), .cmd_w(w),
    .out_valid, .out_row, .res, .res_valid, .done);
  always #5 clk = ~clk;

  logic [COLS-1:0] m [ROWS];
  logic [COLS-1:0] last_out;
  int busy_cycles;
  always @(posedge clk) if (out_valid) last_out <= out_row;

  task automatic issue(input cma_cmd_t c, input logic [COLS-1:0] d);
    while (!cmd_ready) @(negedge clk);
    cmd = c; wdata = d; cmd_valid = 1;
    @(negedge clk); cmd_valid = 0; busy_cycles = 1;
    while (!done) begin @(negedge clk); busy_cycles++; end
  endtask
  function automatic cma_cmd_t mk(cmd_e k, int a = 0, int b = 0, int d = 0, int nb = 0);
    cma_cmd_t c; c = '0; c.cmd = k; c.row_a = row_addr_t'(a); c.row_b = row_addr_t'(b);
    c.row_d = row_addr_t'(d); c.nbits = 6'(nb); c.col_lo = 0; c.col_hi = 16'(COLS - 1);
    return c;
  endfunction

  initial begin
    #5000000 failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    cma_cmd_t c;
    cmd_valid = 0; cmd = '0; wdata = 0; w = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    // memory mode
    for (int r = 0; r < ROWS; r++) begin m[r] = COLS'($urandom); issue(mk(CMD_WRITE, 0, 0, r), m[r]); end
    for (int t = 0; t < 10; t++) begin
      int r, lo, hi; logic [COLS-1:0] d, msk;
      r = $urandom_range(0, ROWS - 1); lo = $urandom_range(0, COLS - 1); hi = $urandom_range(lo, COLS - 1);
      d = COLS'($urandom); c = mk(CMD_WRITE, 0, 0, r); c.col_lo = 16'(lo); c.col_hi = 16'(hi);
      issue(c, d);
      msk = '0; for (int i = lo; i <= hi; i++) msk[i] = 1;
      m[r] = (m[r] & ~msk) | (d & msk);
    end
    for (int t = 0; t < 20; t++) begin
      int r; r = $urandom_range(0, ROWS - 1);
      issue(mk(CMD_READ, r), 0);
      checks++; if (last_out !== m[r]) begin failures++; $display("READ %0d %h vs %h", r, last_out, m[r]); end
    end
    // Boolean functions
    for (int t = 0; t < 40; t++) begin
      int a, b, d; logic wb; logic [COLS-1:0] e; sa_op_e op;
      a = $urandom_range(0, 31); b = $urandom_range(0, 31); if (b == a) b = (a + 1) % 32;
      d = $urandom_range(32, ROWS - 1); wb = 1'($urandom);
      op = sa_op_e'($urandom_range(1, 5));
      case (op)
        SA_NOT:  e = ~m[a];
        SA_AND:  e = m[a] & m[b];
        SA_NAND: e = ~(m[a] & m[b]);
        SA_OR:   e = m[a] | m[b];
        default: e = m[a] ^ m[b];
      endcase
      c = mk(CMD_BOOL, a, b, d); c.op = op; c.wb = wb;
      issue(c, 0);
      checks++; if (last_out !== e) begin failures++; $display("%s got %h exp %h", op.name(), last_out, e); end
      if (wb) m[d] = e;
      issue(mk(CMD_READ, d), 0);
      checks++; if (last_out !== m[d]) begin failures++; $display("BOOL write-back"); end
    end
    // bit-serial ADD / SUB, operands in rows 0..7 and 8..15, result 32..47
    for (int t = 0; t < 20; t++) begin
      int nb; logic sub; logic [15:0] x [COLS], y [COLS], g [COLS];
      nb = (t % 2) ? 8 : 16; sub = (t % 4) >= 2;
      for (int r = 0; r < 32; r++) begin m[r] = COLS'($urandom); issue(mk(CMD_WRITE, 0, 0, r), m[r]); end
      foreach (x[i]) for (int k = 0; k < 16; k++) begin x[i][k] = m[k][i]; y[i][k] = m[16 + k][i]; end
      c = mk(sub ? CMD_SUB : CMD_ADD, 0, 16, 32, nb);
      issue(c, 0);
      checks++;
      if (busy_cycles != (sub ? 2 : 1) * nb + 3) begin
        failures++; $display("%s %0d-bit took %0d cycles", sub ? "SUB" : "ADD", nb, busy_cycles);
      end
      for (int k = 0; k < nb; k++) begin
        issue(mk(CMD_READ, 32 + k), 0);
        foreach (g[i]) g[i][k] = last_out[i];
      end
      foreach (g[i]) begin
        logic [15:0] e; e = sub ? x[i] - y[i] : x[i] + y[i];
        checks++;
        if ((g[i] ^ e) & ((17'h1 << nb) - 1) != 0) begin failures++; $display("%s col %0d got %h exp %h", sub ? "SUB" : "ADD", i, g[i], e); end
      end
    end
    // ternary dot products
    for (int t = 0; t < 30; t++) begin
      logic signed [AB-1:0] x [MH][COLS]; int wv [MH]; int gs, dot_cycles;
      for (int i = 0; i < MH; i++) begin
        for (int col = 0; col < COLS; col++) x[i][col] = AB'($urandom);
        for (int k = 0; k < AB; k++) begin
          logic [COLS-1:0] rowv; foreach (rowv[col]) rowv[col] = x[i][col][k];
          issue(mk(CMD_WRITE, 0, 0, i * STRIDE + k), rowv);
        end
        if (t == 0) wv[i] = 0; else if (t == 1) wv[i] = (i % 2) ? 1 : -1;
        else wv[i] = $urandom_range(0, 2) - 1;
        w[i] = (wv[i] == 1) ? W_POS : (wv[i] == -1) ? W_NEG : W_ZERO;
      end
      issue(mk(CMD_LOAD_W), 0);
      issue(mk(CMD_DOT), 0);
      dot_cycles = busy_cycles;
      begin
        int p, n, v; p = 0; n = 0;
        foreach (wv[i]) begin if (wv[i] == 1) p++; if (wv[i] == -1) n++; end
        v = ((p > 0) ? p - 1 : 0) + ((n > 0) ? n - 1 : 0) + ((n > 0) ? 2 : 0);
        checks++;
        if (dot_cycles < PB * v + 4 || dot_cycles > PB * v + 8) begin
          failures++; $display("DOT p=%0d n=%0d took %0d cycles", p, n, dot_cycles);
        end
      end
      gs = t % 3;
      c = mk(CMD_READOUT); c.red_log2 = 4'(gs);
      issue(c, 0);
      while (!res_valid) @(negedge clk);
      for (int i = 0; i < COLS; i++) begin
        int e; e = 0;
        if (i < (COLS >> gs))
          for (int col = i << gs; col < ((i + 1) << gs); col++) begin
            int d; d = 0;
            for (int j = 0; j < MH; j++) d += wv[j] * int'(x[j][col]);
            e += int'(signed'(PB'(d)));
          end
        checks++;
        if (int'(res[i]) != e) begin failures++; $display("DOT t=%0d g=%0d res[%0d]=%0d exp %0d", t, gs, i, res[i], e); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
