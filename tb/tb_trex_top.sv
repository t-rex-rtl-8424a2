// tb_trex_top: end-to-end test of the accelerator at its default size.
//
// Plays a small factorized layer through the command port, with an external
// memory model behind the DMA:
//  * DMA loads X (16x32), the 4b codes of W_S (32x16), the dequantizer LUT,
//    the W_D non-zeros (10 per column, delta-encoded indices, 6b values),
//    biases, the AFU LUTs and a row of attention scores into the GB.
//  * DMM core 0: Y = X * W_S as two K tiles (the second accumulated), 8b,
//    W_S dequantized through the LUT; Y stored column by column.
//  * SMM cores 0 and 1: Z = Y * W_D for 8 output columns in column-product
//    mode, each column as two groups of non-zeros (8 + 2) found by relative
//    addressing; Z stored row by row. SMM core 2: the same non-zeros in
//    row-product mode.
//  * AFUs: softmax of the score row at input lengths 100, 50 and 20 (batch
//    modes of one, two and four inputs), GELU of Z, residual Z + Z2, and
//    layer normalization of Z with gamma (high halves, from Y) and beta
//    (from Z2) loaded into AFU buffer B by two 16b loads.
//  * DMA writes all results back; the testbench compares them with its own
//    reference model, and counts how often each mechanism occurred.
module tb_trex_top;
  import trex_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cmd_valid = 0, cmd_ready, busy;
  cmd_t cmd;
  logic ext_req_valid, ext_req_ready, ext_req_we, ext_rsp_valid;
  logic [23:0] ext_req_addr;
  logic [255:0] ext_req_wdata, ext_rsp_rdata;
  nb_e nb;
  logic [1:0] core_input [4], core_part [4];
  logic len_error;

  trex_top dut (.*);

  // ---------------- external memory model ----------------
  logic [255:0] ext_mem [1024];
  int rsp_wait = -1;
  logic [23:0] rsp_addr;
  initial begin
    ext_req_ready = 0; ext_rsp_valid = 0; ext_rsp_rdata = 0;
    forever begin
      @(negedge clk);
      ext_rsp_valid = 0;
      if (rsp_wait == 0) begin ext_rsp_valid = 1; ext_rsp_rdata = ext_mem[rsp_addr[9:0]]; end
      if (rsp_wait >= 0) rsp_wait--;
      ext_req_ready = ($urandom_range(0, 3) != 0);
      @(posedge clk);
      if (ext_req_valid && ext_req_ready) begin
        if (ext_req_we) ext_mem[ext_req_addr[9:0]] = ext_req_wdata;
        else begin rsp_wait = $urandom_range(0, 2); rsp_addr = ext_req_addr; end
      end
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- mechanism counters ----------------
  int n_dma_rd, n_dma_wr, n_deq, n_acc, n_col_st, n_row_st, n_colprod, n_rowprod, n_multigrp,
      n_reladdr, n_nb [3], n_softmax, n_gelu, n_resid, n_lnorm, n_prec8, n_prec16;
  always @(posedge clk) if (rst_n) begin
    if (dut.dma_start && !dut.dma_dir) n_dma_rd++;
    if (dut.dma_start &&  dut.dma_dir) n_dma_wr++;
    if (|dut.dmm_start && dut.dmm_deq) n_deq++;
    if (|dut.dmm_start && dut.dmm_acc) n_acc++;
    if (|dut.dmm_start && dut.dmm_prec == PREC_8) n_prec8++;
    if (|dut.smm_start && dut.smm_prec == PREC_16) n_prec16++;
    if (dut.g1_we && dut.u_ctrl.c.op == OP_DMM_ST && dut.u_ctrl.c.dir) n_col_st++;
    if (dut.g1_we && dut.u_ctrl.c.op == OP_SMM_ST && !dut.u_ctrl.c.dir) n_row_st++;
    if (|dut.smm_start && !dut.smm_row) n_colprod++;
    if (|dut.smm_start &&  dut.smm_row) n_rowprod++;
    if (|dut.smm_start && !dut.smm_clr) n_multigrp++;
    if (dut.u_ctrl.ra_step && !dut.u_ctrl.ra_reset) n_reladdr++;
    if (|dut.afu_start) begin
      if (dut.afu_op == AFU_SOFTMAX) begin n_softmax++; n_nb[int'(nb)]++; end
      if (dut.afu_op == AFU_GELU) n_gelu++;
      if (dut.afu_op == AFU_RESIDUAL) n_resid++;
      if (dut.afu_op == AFU_LN_NORM) n_lnorm++;
    end
  end

  // ---------------- command issue ----------------
  task automatic send(input cmd_t c);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd = c; cmd_valid = 1;
    @(negedge clk);
    cmd_valid = 0;
    while (!cmd_ready) @(negedge clk);
  endtask

  function automatic cmd_t mk(opcode_e op, int mask, int ga);
    cmd_t c;
    c = '0;
    c.op = op; c.unit_mask = 4'(mask); c.gb_addr = 16'(ga);
    return c;
  endfunction

  // ---------------- data and reference ----------------
  int X [16][32];            // 8b activations
  int code [32][16];         // 4b W_S codes
  int L [16];                // dequantizer levels (8b)
  int Y [16][16], Yq [16][16];
  int scale, offs, bias [16];
  int nzi [8][10], nzc [8][10];
  int Z [16][8], Z2 [8][8];
  int explut [256], gelulut [256];
  int S [128];

  function automatic int s16(int v);
    return int'(16'(v)) << 16 >>> 16;
  endfunction
  function automatic int sext8(int v);
    return int'(8'(v)) << 24 >>> 24;
  endfunction
  function automatic int sat16(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction
  function automatic int deq(int cv);
    longint e;
    e = longint'(cv) * scale;
    e = (e >= 0) ? e / 32 : -((-e + 31) / 32);
    if (cv > 0) e += offs; else if (cv < 0) e -= offs; else e = 0;
    return sat16(e);
  endfunction
  function automatic real gelu(real x);
    return 0.5 * x * (1.0 + $tanh(0.7978845608 * (x + 0.044715 * x * x * x)));
  endfunction

  task automatic check16(input int gbw, input int e, input int expv, input string tag);
    logic [15:0] got;
    got = ext_mem[512 + gbw - 200][16*e +: 16];
    checks++;
    if (got !== 16'(expv)) begin
      failures++;
      if (failures < 15) $display("%s word %0d elem %0d: %0d expected %0d", tag, gbw, e, $signed(got), expv);
    end
  endtask

  initial begin
    cmd_t c;
    int cyc_start, cyc_total;
    // ---- build the workload in external memory ----
    for (int k = 0; k < 1024; k++) ext_mem[k] = '0;
    for (int r = 0; r < 16; r++) for (int k = 0; k < 32; k++) X[r][k] = $urandom_range(0, 255) - 128;
    for (int k = 0; k < 32; k++) for (int cc = 0; cc < 16; cc++) code[k][cc] = $urandom_range(0, 15);
    for (int i = 0; i < 16; i++) L[i] = (i - 8) * 15 + $urandom_range(0, 7);
    scale = $urandom_range(2000, 8000); offs = $urandom_range(10, 300);
    for (int i = 0; i < 16; i++) bias[i] = $urandom_range(0, 20000) - 10000;
    for (int cc = 0; cc < 8; cc++) begin
      int perm [16];
      for (int i = 0; i < 16; i++) perm[i] = i;
      perm.shuffle();
      for (int i = 0; i < 10; i++) nzi[cc][i] = perm[i];
      nzi[cc].sort();
      for (int i = 0; i < 10; i++) nzc[cc][i] = $urandom_range(0, 63) - 32;
    end
    for (int t = 0; t < 2; t++)
      for (int r = 0; r < 16; r++)
        for (int e = 0; e < 16; e++) ext_mem[t*16 + r][16*e +: 16] = 16'(X[r][16*t + e]);
    for (int k = 0; k < 32; k++)
      for (int cc = 0; cc < 16; cc++) ext_mem[32 + k/4][64*(k%4) + 4*cc +: 4] = 4'(code[k][cc]);
    for (int i = 0; i < 16; i++) ext_mem[40][16*i +: 16] = 16'(L[i]);
    ext_mem[41][15:0] = 16'(scale); ext_mem[41][31:16] = 16'(offs);
    for (int i = 0; i < 16; i++) ext_mem[42][16*i +: 16] = 16'(bias[i]);
    for (int cc = 0; cc < 8; cc++) begin
      int prev;
      prev = 0;
      for (int i = 0; i < 10; i++) begin
        int w, sl;
        w = 48 + 2*cc + i/8; sl = i % 8;
        ext_mem[w][16*sl +: 16] = {5'd0, 5'(nzi[cc][i] - prev), 6'(nzc[cc][i])};
        prev = nzi[cc][i];
      end
    end
    for (int i = 0; i < 256; i++) begin
      explut[i]  = int'(65535.0 * $exp(-real'(i) / 16.0));
      gelulut[i] = int'(gelu(real'((i - 128) * 16)));
      ext_mem[64 + i/16][16*(i%16) +: 16] = 16'(explut[i]);
      ext_mem[80 + i/16][16*(i%16) +: 16] = 16'(gelulut[i]);
    end
    for (int p = 0; p < 128; p++) begin
      S[p] = $urandom_range(0, 4000) - 2000;
      ext_mem[96 + p/16][16*(p%16) +: 16] = 16'(S[p]);
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    cyc_start = $time;

    // ---- DMA in ----
    c = mk(OP_DMA_RD, 0, 0);           c.ext_addr = 0;  c.len = 32; send(c);
    c = mk(OP_DMA_RD, 0, GB_WS_BASE);  c.ext_addr = 32; c.len = 9;  send(c);
    c = mk(OP_DMA_RD, 0, 41);          c.ext_addr = 41; c.len = 2;  send(c);
    c = mk(OP_DMA_RD, 0, GB_WD_BASE);  c.ext_addr = 48; c.len = 16; send(c);
    c = mk(OP_DMA_RD, 0, 64);          c.ext_addr = 64; c.len = 40; send(c);

    // ---- DMM: Y = X * deq(W_S), two K tiles ----
    c = mk(OP_DMM_LUT, 1, GB_WS_BASE + 8); send(c);
    for (int t = 0; t < 2; t++) begin
      c = mk(OP_DMM_LDA, 1, 16*t); c.dir = 0; send(c);
      c = mk(OP_DMM_LDB, 1, GB_WS_BASE + 4*t); c.dir = 0; c.flag_c = 1; send(c);
      c = mk(OP_DMM_RUN, 1, 0); c.len = 16; c.prec = PREC_8; c.flag_a = (t == 1); c.flag_b = 1; send(c);
    end
    c = mk(OP_DMM_ST, 1, 200); c.dir = 1; c.shift = 6; send(c);

    // ---- SMM: Z = Y * W_D ----
    c = mk(OP_SMM_BIAS, 4'b0111, 41); c.flag_b = 1; send(c);
    c = mk(OP_SMM_BIAS, 4'b0111, 42); c.sel = 0; send(c);
    for (int cc = 0; cc < 8; cc++)
      for (int h = 0; h < 3; h++)
        for (int g = 0; g < 2; g++) begin
          c = mk(OP_SMM_COL, 1 << h, GB_WD_BASE + 2*cc + g);
          c.gb_addr2 = 200; c.len = (g == 0) ? 8 : 2; c.prec = PREC_16;
          c.flag_a = (g == 0); c.flag_b = (g == 1); c.flag_c = (h == 2);
          c.sel = (h == 2) ? 8'd8 : 8'(cc);
          c.sub = {1'b0, 3'(cc), (h == 1)};
          c.shift = 8;
          send(c);
        end
    c = mk(OP_SMM_ST, 1, 300); c.dir = 0; send(c);
    c = mk(OP_SMM_ST, 2, 308); c.dir = 0; send(c);
    c = mk(OP_SMM_ST, 4, 320); c.dir = 0; send(c);

    // ---- AFU: softmax in three batch modes ----
    for (int a = 0; a < 2; a++) begin
      c = mk(OP_AFU_LUT, 1 << a, 64); c.flag_b = 0; send(c);
      c = mk(OP_AFU_LUT, 1 << a, 80); c.flag_b = 1; send(c);
    end
    for (int m = 0; m < 3; m++) begin
      c = mk(OP_SET_LEN, 0, 0); c.len = (m == 0) ? 100 : (m == 1) ? 50 : 20; send(c);
      c = mk(OP_AFU_LD, 1 << (m % 2), 96); send(c);
      c = mk(OP_AFU_RUN, 1 << (m % 2), 0); c.sel = 8'(AFU_SOFTMAX); c.sub = 4; send(c);
      c = mk(OP_AFU_ST, 1 << (m % 2), 400 + 8*m); send(c);
    end
    c = mk(OP_SET_LEN, 0, 0); c.len = 128; send(c);
    c = mk(OP_AFU_LD, 2, 300); send(c);
    c = mk(OP_AFU_RUN, 2, 0); c.sel = 8'(AFU_GELU); c.sub = 4; send(c);
    c = mk(OP_AFU_ST, 2, 440); send(c);
    c = mk(OP_AFU_LD, 1, 300); send(c);
    c = mk(OP_AFU_LD, 1, 320); c.flag_a = 1; send(c);
    c = mk(OP_AFU_RUN, 1, 0); c.sel = 8'(AFU_RESIDUAL); send(c);
    c = mk(OP_AFU_ST, 1, 450); send(c);
    c = mk(OP_AFU_LD, 1, 300); send(c);
    c = mk(OP_AFU_RUN, 1, 0); c.sel = 8'(AFU_LN_STAT); send(c);
    c = mk(OP_AFU_LD, 1, 320); c.flag_a = 1; send(c);
    c = mk(OP_AFU_LD, 1, 200); c.flag_a = 1; c.flag_b = 1; send(c);
    c = mk(OP_AFU_RUN, 1, 0); c.sel = 8'(AFU_LN_NORM); c.sub = 8; send(c);
    c = mk(OP_AFU_ST, 1, 460); send(c);

    // ---- DMA out ----
    c = mk(OP_DMA_WR, 0, 200); c.ext_addr = 512; c.len = 268; send(c);
    cyc_total = (int'($time) - cyc_start) / 10;

    // ---- reference and comparison ----
    for (int r = 0; r < 16; r++) for (int cc = 0; cc < 16; cc++) begin
      Y[r][cc] = 0;
      for (int k = 0; k < 32; k++) Y[r][cc] += sext8(X[r][k]) * sext8(L[code[k][cc]]);
      Yq[r][cc] = sat16(longint'(Y[r][cc] >>> 6));
    end
    for (int cc = 0; cc < 16; cc++) for (int r = 0; r < 16; r++) check16(200 + cc, r, Yq[r][cc], "Y");
    for (int cc = 0; cc < 8; cc++) begin
      longint acc [16];
      for (int r = 0; r < 16; r++) begin
        acc[r] = 0;
        for (int i = 0; i < 10; i++) acc[r] += longint'(Yq[r][nzi[cc][i]]) * deq(nzc[cc][i]);
        Z[r][cc] = sat16((acc[r] + bias[cc]) >>> 8);
        if (r < 8) Z2[cc][r] = sat16((acc[r] + bias[8 + r]) >>> 8);
      end
    end
    for (int r = 0; r < 16; r++) for (int cc = 0; cc < 8; cc++) check16(300 + r, cc, Z[r][cc], "Z");
    for (int cc = 0; cc < 8; cc++) for (int r = 0; r < 8; r++) check16(320 + cc, r, Z2[cc][r], "Z row-product");
    for (int m = 0; m < 3; m++) begin
      int nbi, len, size;
      nbi = 1 << m; len = (m == 0) ? 100 : (m == 1) ? 50 : 20; size = 128 / nbi;
      for (int s = 0; s < nbi; s++) begin
        int mx;
        longint sum, recip, e [128];
        mx = -32'sd2147483647 - 1;
        for (int p = s*size; p < s*size + len; p++) if (S[p] > mx) mx = S[p];
        sum = 0;
        for (int p = s*size; p < (s+1)*size; p++) begin
          int idx;
          idx = (mx - S[p]) >>> 4;
          if (idx > 255) idx = 255;
          e[p] = (p < s*size + len) ? explut[idx] : 0;
          sum += e[p];
        end
        recip = (longint'(1) << 32) / sum;
        for (int p = s*size; p < (s+1)*size; p++) begin
          longint pr;
          pr = (e[p] * recip) >> 16;
          if (pr > 65535) pr = 65535;
          check16(400 + 8*m + p/16, p%16, int'(pr), $sformatf("softmax x%0d", nbi));
        end
      end
    end
    for (int p = 0; p < 128; p++) begin
      int x, t, g, x2;
      x = (p % 16 < 8) ? Z[p/16][p%16] : 0;
      t = x >>> 4;
      g = (t > 127) ? x : (t < -128) ? 0 : s16(gelulut[t + 128]);
      check16(440 + p/16, p%16, g, "gelu");
      x2 = (p % 16 < 8 && p/16 < 8) ? Z2[p/16][p%16] : 0;
      check16(450 + p/16, p%16, x + x2, "residual");
    end
    begin
      longint sum, sq, mean, v, root, lo, hi, mid, rstd;
      sum = 0; sq = 0;
      for (int p = 0; p < 128; p++) begin
        longint x;
        x = (p % 16 < 8) ? Z[p/16][p%16] : 0;
        sum += x; sq += x * x;
      end
      mean = sum / 128;
      v = sq / 128 - mean * mean;
      if (v < 0) v = 0;
      v = v << 16;
      lo = 0; hi = 64'd4294967295;
      while (lo < hi) begin
        mid = (lo + hi + 1) / 2;
        if (mid * mid <= v) lo = mid; else hi = mid - 1;
      end
      root = lo;
      rstd = (root == 0) ? 0 : (longint'(1) << 48) / root;
      for (int p = 0; p < 128; p++) begin
        longint x, n, y, g, b;
        x = (p % 16 < 8) ? Z[p/16][p%16] : 0;
        g = Yq[p%16][p/16];
        b = (p % 16 < 8 && p/16 < 8) ? Z2[p/16][p%16] : 0;
        n = ((x - mean) * rstd) >>> 24;
        y = (((n * g) >>> 12) + (b <<< 4)) >>> 8;
        if (y > 64'sd2147483647) y = 64'sd2147483647;
        if (y < -64'sd2147483647 - 1) y = -64'sd2147483647 - 1;
        check16(460 + p/16, p%16, s16(int'(y)), "layernorm");
      end
    end

    // ---- every mechanism must have happened ----
    begin
      string names [18] = '{"dma read", "dma write", "W_S dequantization", "DMM K-tile accumulation",
        "Y stored column-wise", "Z stored row-wise", "SMM column product", "SMM row product",
        "SMM multi-group accumulation", "relative addressing", "batch of 1", "batch of 2", "batch of 4",
        "softmax", "GELU", "residual", "8b and 16b precision", "layer normalization"};
      int cnt [18];
      cnt = '{n_dma_rd, n_dma_wr, n_deq, n_acc, n_col_st, n_row_st, n_colprod, n_rowprod, n_multigrp,
              n_reladdr, n_nb[0], n_nb[1], n_nb[2], n_softmax, n_gelu, n_resid,
              (n_prec8 > 0 && n_prec16 > 0) ? n_prec8 + n_prec16 : 0, n_lnorm};
      for (int i = 0; i < 18; i++) begin
        $display("mechanism %-30s %0d", names[i], cnt[i]);
        checks++;
        if (cnt[i] == 0) begin failures++; $display("mechanism never exercised: %s", names[i]); end
      end
    end
    $display("end-to-end run: %0d cycles", cyc_total);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
