// tb_sacu -- runs the sparse addition control unit against a behavioural
// bit-serial engine and memory written in this testbench. Random ternary
// weights (including all-zero and binary +1/-1 sets) and random 8-bit signed
// activations in COLS columns; after each dot product the result rows must
// hold sum_i w_i * x_i (mod 2**PSUM_BITS) in every column, the activation
// rows must be unchanged, and the number of operations issued must be
// max(p-1,0) + max(n-1,0) + 2*(n>0). The run time must be PSUM_BITS cycles
// per operation plus 3 to 7 control cycles, and equal for equal (p, n).
module tb_sacu;
  import fat_pkg::*;
  localparam int ROWS = 512, MH = 32, AB = 8, PB = 8, COLS = 6;
  localparam int STRIDE = AB + PB;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic w_load, start, busy, done, vop_valid, vop_ready, eng_idle;
  logic [MH-1:0][1:0] w_in, w_q;
  vop_t vop;
  row_addr_t res_base;
  logic [5:0] res_len;
  sacu #(.ROWS(ROWS), .MH(MH), .ACT_BITS(AB), .PSUM_BITS(PB)) dut (
    .clk, .rst_n, .w_load, .w_in, .start, .busy, .done, .vop, .vop_valid, .vop_ready,
    .eng_idle, .res_base, .res_len, .w_q);
  always #5 clk = ~clk;

  // behavioural engine + memory
  logic [COLS-1:0] mem [ROWS+2];
  vop_t cur; int k; logic act; logic [COLS-1:0] carry;
  int nvops;
  int seen [int];
  assign eng_idle  = !act;
  assign vop_ready = !act || (k == int'(cur.nbits) - 1);
  function automatic int rowof(row_addr_t b, logic [5:0] l, int kk);
    return int'(b) + ((kk < int'(l)) ? kk : int'(l) - 1);
  endfunction
  always @(posedge clk) begin
    if (act) begin
      logic [COLS-1:0] a, b, s;
      a = mem[rowof(cur.base_a, cur.len_a, k)];
      b = mem[rowof(cur.base_b, cur.len_b, k)];
      if (cur.op == SA_NOT) s = a ^ b;
      else begin s = a ^ b ^ carry; carry = (a & b) | (carry & (a | b)); end
      if (int'(cur.base_d) + k < ROWS) mem[int'(cur.base_d) + k] <= s;
      else begin failures++; $display("write outside data rows"); end
    end
    if (vop_valid && vop_ready) begin
      cur <= vop; k <= 0; act <= 1; carry = {COLS{vop.cin}}; nvops++;
    end else if (act) begin
      if (k == int'(cur.nbits) - 1) act <= 0; else k <= k + 1;
    end
  end

  initial begin
    #20000000 failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    logic signed [AB-1:0] x [MH][COLS];
    int w [MH];
    act = 0; w_load = 0; start = 0; w_in = '0;
    mem[ROWS] = '0; mem[ROWS+1] = '1;
    for (int r = 0; r < ROWS; r++) mem[r] = COLS'($urandom);
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 120; t++) begin
      int p, n, cyc, sparsity;
      sparsity = (t % 5) * 20;  // 0..80 %
      if (t == 3) sparsity = 100;
      for (int i = 0; i < MH; i++) begin
        if (t == 1)      w[i] = 0;
        else if (t == 2) w[i] = ($urandom_range(0, 1) != 0) ? 1 : -1;  // binary
        else if (t == 4) w[i] = ($urandom_range(0, 1) != 0) ? 0 : -1;  // no +1 weights
        else if ($urandom_range(0, 99) < sparsity) w[i] = 0;
        else w[i] = ($urandom_range(0, 1) != 0) ? 1 : -1;
        for (int c = 0; c < COLS; c++) begin
          x[i][c] = AB'($urandom);
          for (int b = 0; b < AB; b++) mem[i * STRIDE + b][c] = x[i][c][b];
        end
        w_in[i] = (w[i] == 1) ? W_POS : (w[i] == -1) ? W_NEG : W_ZERO;
      end
      p = 0; n = 0;
      foreach (w[i]) begin if (w[i] == 1) p++; if (w[i] == -1) n++; end
      @(negedge clk); w_load = 1; @(negedge clk); w_load = 0;
      checks++; if (w_q !== w_in) begin failures++; $display("weight registers"); end
      nvops = 0;
      start = 1; @(negedge clk); start = 0; cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (nvops != ((p > 0) ? p - 1 : 0) + ((n > 0) ? n - 1 : 0) + ((n > 0) ? 2 : 0)) begin
        failures++; $display("t=%0d p=%0d n=%0d vops=%0d", t, p, n, nvops);
      end
      checks++;
      if (cyc < PB * nvops + 3 || cyc > PB * nvops + 7) begin
        failures++; $display("t=%0d p=%0d n=%0d vops=%0d cycles=%0d", t, p, n, nvops, cyc);
      end
      if (seen.exists(p * 100 + n)) begin
        checks++;
        if (seen[p * 100 + n] != cyc) begin failures++; $display("p=%0d n=%0d cycles differ", p, n); end
      end
      seen[p * 100 + n] = cyc;
      for (int c = 0; c < COLS; c++) begin
        logic [PB-1:0] got; int e;
        e = 0;
        for (int i = 0; i < MH; i++) e += w[i] * int'(x[i][c]);
        for (int b = 0; b < PB; b++) got[b] = mem[rowof(res_base, res_len, b)][c];
        checks++;
        if (got !== PB'(e)) begin failures++; $display("t=%0d col %0d got %0d exp %0d", t, c, got, PB'(e)); end
        for (int i = 0; i < MH; i++) for (int b = 0; b < AB; b++)
          if (mem[i * STRIDE + b][c] !== x[i][c][b]) begin failures++; $display("activation overwritten"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
