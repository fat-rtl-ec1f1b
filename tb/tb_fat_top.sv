// tb_fat_top -- end-to-end test of the accelerator at a reduced size
// (4 arrays of 128 x 16 bits, 4 weights per array). A reference model in the
// testbench follows every instruction. Each trial:
//  1. writes random 8-bit activations, column-major, into every array at the
//     CS interval layout (slot i at rows 16*i .. 16*i+7), and loads a random
//     ternary weight set per array (some trials all-zero or all +-1);
//  2. broadcasts DOT to all arrays, then READOUT with a random column-group
//     size (reduction unit);
//  3. collects the results of arrays {0,1} or {2,3} (one filter split over
//     two arrays), applies ReLU / batch normalisation in the DPU and writes the
//     output vector back into array 3 at rows 64..71;
//  4. reads those rows back, and runs an in-memory ADD, SUB and Boolean
//     operation on the written-back data in array 3.
// Every mechanism has a counter of correct occurrences; a mechanism that
// never occurred counts as a failure.
module tb_fat_top;
  import fat_pkg::*;
  localparam int NC = 4, ROWS = 128, COLS = 16, MH = 4, AB = 8, PB = 8, STRIDE = AB + PB;
  localparam int CIW = 2, ACC_W = 32, OUT_W = PB + 4;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic h_valid, h_ready, h_bcast, rd_valid;
  logic [CIW-1:0] h_sel;
  cma_cmd_t h_cmd;
  logic [COLS-1:0] h_wdata, rd_row;
  logic [MH-1:0][1:0] h_w;
  logic c_start, relu_en, store_en, c_busy, ofm_valid;
  logic [CIW-1:0] c_base, store_sel;
  logic [CIW:0] c_count;
  logic signed [ACC_W-1:0] bn_mean;
  logic signed [15:0] bn_scale;
  logic [4:0] bn_shift;
  row_addr_t store_row;
  logic signed [AB-1:0] ofm [COLS];

  fat_top #(.NUM_CMA(NC), .ROWS(ROWS), .COLS(COLS), .MH(MH), .ACT_BITS(AB), .PSUM_BITS(PB),
            .ACC_W(ACC_W)) dut (.*);
  always #5 clk = ~clk;

  // mechanism counters
  int n_bcast_dot, n_zero_skip, n_neg_stage, n_binary, n_group, n_cross, n_relu, n_bn,
      n_store, n_add, n_sub, n_bool, n_read;

  logic [COLS-1:0] last_rd;
  logic signed [AB-1:0] last_ofm [COLS];
  always @(posedge clk) begin
    if (rd_valid) last_rd <= rd_row;
    if (ofm_valid) last_ofm <= ofm;
  end

  int cyc;
  task automatic issue(input logic bc, input int sel, input cma_cmd_t c, input logic [COLS-1:0] d);
    while (!h_ready) @(negedge clk);
    h_bcast = bc; h_sel = CIW'(sel); h_cmd = c; h_wdata = d; h_valid = 1;
    @(negedge clk); h_valid = 0; cyc = 1;
    while (!h_ready) begin @(negedge clk); cyc++; end
  endtask
  function automatic cma_cmd_t mk(cmd_e k, int a = 0, int b = 0, int d = 0, int nb = 0);
    cma_cmd_t c; c = '0; c.cmd = k; c.row_a = row_addr_t'(a); c.row_b = row_addr_t'(b);
    c.row_d = row_addr_t'(d); c.nbits = 6'(nb); c.col_lo = 0; c.col_hi = 16'(COLS - 1);
    return c;
  endfunction
  // read nb rows starting at r of array s as one value per column
  task automatic read_vec(input int s, input int r, input int nb, output logic [15:0] v [COLS]);
    foreach (v[i]) v[i] = '0;
    for (int k = 0; k < nb; k++) begin
      issue(0, s, mk(CMD_READ, r + k), 0);
      foreach (v[i]) v[i][k] = last_rd[i];
    end
  endtask
  task automatic write_vec(input int s, input int r, input int nb, input logic [15:0] v [COLS]);
    for (int k = 0; k < nb; k++) begin
      logic [COLS-1:0] rw; foreach (rw[i]) rw[i] = v[i][k];
      issue(0, s, mk(CMD_WRITE, 0, 0, r + k), rw);
    end
  endtask

  initial begin
    #20000000 failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic signed [AB-1:0] x [NC][MH][COLS];
    int wv [NC][MH];
    int res [NC][COLS];
    h_valid = 0; h_bcast = 0; h_sel = 0; h_cmd = '0; h_wdata = 0; h_w = '0;
    c_start = 0; c_base = 0; c_count = 0; relu_en = 0; bn_mean = 0; bn_scale = 0; bn_shift = 0;
    store_en = 0; store_sel = 0; store_row = '0;
    {n_bcast_dot, n_zero_skip, n_neg_stage, n_binary, n_group, n_cross, n_relu, n_bn,
     n_store, n_add, n_sub, n_bool, n_read} = '0;
    repeat (3) @(negedge clk); rst_n = 1;

    for (int t = 0; t < 12; t++) begin
      int gs, grp, maxv;
      logic ok_dot;
      // 1. activations and weights
      for (int s = 0; s < NC; s++) begin
        for (int i = 0; i < MH; i++) begin
          logic [15:0] v [COLS];
          for (int col = 0; col < COLS; col++) begin x[s][i][col] = AB'($urandom); v[col] = 16'(x[s][i][col]); end
          write_vec(s, i * STRIDE, AB, v);
          if (t == 1) wv[s][i] = (i % 2) ? 1 : -1;          // binary weights
          else if (t == 2 && s == 0) wv[s][i] = 0;          // fully sparse array
          else wv[s][i] = $urandom_range(0, 2) - 1;
          h_w[i] = (wv[s][i] == 1) ? W_POS : (wv[s][i] == -1) ? W_NEG : W_ZERO;
        end
        issue(0, s, mk(CMD_LOAD_W), 0);
      end
      // 2. broadcast DOT and READOUT
      issue(1, 0, mk(CMD_DOT), 0);
      begin
        int maxp; maxp = 0;
        // the slowest array sets the time: its accumulation count only
        for (int s = 0; s < NC; s++) begin
          int p, n, v; p = 0; n = 0;
          foreach (wv[s][i]) begin if (wv[s][i] == 1) p++; if (wv[s][i] == -1) n++; end
          v = ((p > 0) ? p - 1 : 0) + ((n > 0) ? n - 1 : 0) + ((n > 0) ? 2 : 0);
          if (v > maxp) maxp = v;
        end
        checks++;
        if (cyc < PB * maxp + 4 || cyc > PB * maxp + 8) begin
          failures++; $display("t=%0d broadcast DOT took %0d cycles, %0d additions", t, cyc, maxp);
        end
        else n_bcast_dot++;
      end
      gs = $urandom_range(0, 2);
      begin cma_cmd_t c; c = mk(CMD_READOUT); c.red_log2 = 4'(gs); issue(1, 0, c, 0); end
      repeat (2) @(negedge clk);
      // check every array's grouped result
      ok_dot = 1;
      for (int s = 0; s < NC; s++) begin
        int p, n; p = 0; n = 0;
        foreach (wv[s][i]) begin if (wv[s][i] == 1) p++; if (wv[s][i] == -1) n++; end
        for (int i = 0; i < COLS; i++) begin
          int e; e = 0;
          if (i < (COLS >> gs))
            for (int col = i << gs; col < ((i + 1) << gs); col++) begin
              int d; d = 0;
              for (int j = 0; j < MH; j++) d += wv[s][j] * int'(x[s][j][col]);
              e += int'(signed'(PB'(d)));
            end
          res[s][i] = e;
          checks++;
          if (int'(dut.cma_res[s][i]) != e) begin
            failures++; ok_dot = 0;
            $display("t=%0d array %0d lane %0d: %0d exp %0d", t, s, i, dut.cma_res[s][i], e);
          end
        end
        if (ok_dot && p + n < MH) n_zero_skip++;
        if (ok_dot && n > 0) n_neg_stage++;
        if (ok_dot && p + n == MH) n_binary++;
        if (ok_dot && gs > 0) n_group++;
      end
      // 3. collect over a two-array group, DPU, write back into array 3
      grp = (t % 2) * 2;
      maxv = 0;
      while (c_busy) @(negedge clk);
      c_base = CIW'(grp); c_count = 2; relu_en = (t % 3) != 0;
      bn_mean = ACC_W'($urandom_range(0, 20)) - 10; bn_scale = 16'($urandom_range(1, 300));
      bn_shift = 5'($urandom_range(0, 6)); store_en = 1; store_sel = 3; store_row = row_addr_t'(64);
      c_start = 1; @(negedge clk); c_start = 0;
      while (c_busy) @(negedge clk);
      begin
        logic [15:0] back [COLS];
        logic any_relu, ok;
        any_relu = 0; ok = 1;
        for (int i = 0; i < COLS; i++) begin
          longint a, r, z;
          a = res[grp][i] + res[grp + 1][i];
          r = (relu_en && a < 0) ? 0 : a;
          if (relu_en && a < 0) any_relu = 1;
          z = ((r - longint'(bn_mean)) * longint'(bn_scale)) >>> bn_shift;
          if (z > 127) z = 127; if (z < -128) z = -128;
          checks++;
          if (int'(last_ofm[i]) != int'(z)) begin
            failures++; ok = 0; $display("t=%0d ofm[%0d]=%0d exp %0d (acc %0d)", t, i, last_ofm[i], z, a);
          end
        end
        if (ok) begin n_cross++; n_bn++; if (any_relu) n_relu++; end
        // 4. write-back and IMC on it
        read_vec(3, 64, AB, back);
        ok = 1;
        for (int i = 0; i < COLS; i++) begin
          checks++;
          if (AB'(back[i]) != AB'(last_ofm[i])) begin failures++; ok = 0; $display("write-back col %0d", i); end
        end
        if (ok) begin n_store++; n_read++; end
        begin
          logic [15:0] y [COLS], g [COLS];
          int op;
          foreach (y[i]) y[i] = 16'($urandom);
          write_vec(3, 80, AB, y);
          op = t % 3;
          if (op == 0) issue(0, 3, mk(CMD_ADD, 64, 80, 96, AB), 0);
          else if (op == 1) issue(0, 3, mk(CMD_SUB, 64, 80, 96, AB), 0);
          else begin
            cma_cmd_t c; c = mk(CMD_BOOL, 64, 80, 96); c.op = SA_XOR; c.wb = 1;
            for (int k = 0; k < AB; k++) begin c.row_a = row_addr_t'(64 + k); c.row_b = row_addr_t'(80 + k);
              c.row_d = row_addr_t'(96 + k); issue(0, 3, c, 0); end
          end
          read_vec(3, 96, AB, g);
          ok = 1;
          for (int i = 0; i < COLS; i++) begin
            logic [AB-1:0] e;
            e = (op == 0) ? AB'(back[i] + y[i]) : (op == 1) ? AB'(back[i] - y[i]) : AB'(back[i] ^ y[i]);
            checks++;
            if (AB'(g[i]) != e) begin failures++; ok = 0; $display("IMC op %0d col %0d %h exp %h", op, i, g[i], e); end
          end
          if (ok) begin if (op == 0) n_add++; else if (op == 1) n_sub++; else n_bool++; end
        end
      end
    end
    $display("mechanisms: bcast_dot=%0d zero_skip=%0d neg_stage=%0d binary=%0d group=%0d cross=%0d relu=%0d bn=%0d store=%0d add=%0d sub=%0d bool=%0d read=%0d",
             n_bcast_dot, n_zero_skip, n_neg_stage, n_binary, n_group, n_cross, n_relu, n_bn,
             n_store, n_add, n_sub, n_bool, n_read);
    begin
      int cnt [13];
      cnt = '{n_bcast_dot, n_zero_skip, n_neg_stage, n_binary, n_group, n_cross, n_relu, n_bn,
              n_store, n_add, n_sub, n_bool, n_read};
      foreach (cnt[i]) begin checks++; if (cnt[i] == 0) begin failures++; $display("mechanism %0d never exercised", i); end end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
