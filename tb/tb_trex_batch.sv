// tb_trex_batch: dynamic-batching workload on the full-size accelerator.
//
// Runs the dense first half of a factorized layer, Y = X * deq(W_S), for a
// 128-slot token buffer at three input lengths, as the host would for long
// and for short inputs:
//  * length 128: one input (as for the 128-token models);
//  * length 50:  two inputs of 50 tokens in the two 64-token halves;
//  * length 20:  four inputs of 20 tokens in the four 32-token quarters (as
//    for many short inputs).
// X is 8b, 128 token rows x 16 features; W_S is 16x16 4b codes through the
// dequantizer LUT. Tiles of 16 token rows that hold no valid token are
// skipped. The host reads the batch mode and the core assignment
// (core_input, core_part) from the top, loads W_S once into all four DMM
// cores, and gives each core the tiles of its input with
// tile % cores_per_input == core_part. Each round loads one tile per core
// and starts all cores together. Every stored Y tile is compared with a
// reference computed here (padded rows must be 0).
// For length 20 the same work is also run without batching (one input at a
// time, W_S reloaded for each) and the batched schedule must be faster.
// Counted: rounds with all four cores running, W_S loads, and each batch
// mode; a mode that never occurs or a round with an idle core is a failure.
module tb_trex_batch;
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

  // ---------------- counters ----------------
  int n_full_rounds, n_idle_rounds, n_ws_loads, n_mode [3];
  always @(posedge clk) if (rst_n) begin
    if (|dut.dmm_start) begin
      if (dut.dmm_start == 4'hF) n_full_rounds++;
    end
  end

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

  function automatic int sext8(int v);
    return int'(8'(v)) << 24 >>> 24;
  endfunction
  function automatic int sat16(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  localparam int OUT_GB = 1000;
  int X [128][16], code [16][16], L [16];

  // load W_S (codes) into the cores in mask
  task automatic load_ws(input int mask);
    cmd_t c;
    c = mk(OP_DMM_LDB, mask, GB_WS_BASE); c.dir = 0; c.flag_c = 1; send(c);
    n_ws_loads++;
  endtask

  // one round: tile[c] (or -1) on core c; load, run together, store
  task automatic round(input int tile [4]);
    cmd_t c;
    int mask;
    mask = 0;
    for (int k = 0; k < 4; k++) if (tile[k] >= 0) begin
      mask |= 1 << k;
      c = mk(OP_DMM_LDA, 1 << k, 16 * tile[k]); c.dir = 0; send(c);
    end
    c = mk(OP_DMM_RUN, mask, 0); c.len = 16; c.prec = PREC_8; c.flag_b = 1; send(c);
    if (mask != 15) n_idle_rounds++;
    for (int k = 0; k < 4; k++) if (tile[k] >= 0) begin
      c = mk(OP_DMM_ST, 1 << k, OUT_GB + 16 * tile[k]); c.dir = 0; c.shift = 4; send(c);
    end
  endtask

  // read back and check every tile that was computed
  task automatic check_tiles(input int len, input int ni, input bit done_t [8], input string tag);
    cmd_t c;
    for (int k = 0; k < 128; k++) ext_mem[512 + k] = '1;
    c = mk(OP_DMA_WR, 0, OUT_GB); c.ext_addr = 512; c.len = 128; send(c);
    for (int t = 0; t < 8; t++) if (done_t[t])
      for (int r = 0; r < 16; r++) begin
        int g;
        g = 16 * t + r;
        for (int cc = 0; cc < 16; cc++) begin
          int y;
          y = 0;
          if ((g % (128 / ni)) < len)
            for (int k = 0; k < 16; k++) y += sext8(X[g][k]) * sext8(L[code[k][cc]]);
          y = sat16(longint'(y >>> 4));
          checks++;
          if (ext_mem[512 + g][16*cc +: 16] !== 16'(y)) begin
            failures++;
            if (failures < 12) $display("%s row %0d col %0d: %0d expected %0d", tag, g, cc,
                                        $signed(ext_mem[512 + g][16*cc +: 16]), y);
          end
        end
      end
  endtask

  initial begin
    cmd_t c;
    int cyc_b, cyc_u, t0;
    for (int k = 0; k < 1024; k++) ext_mem[k] = '0;
    for (int k = 0; k < 16; k++) for (int cc = 0; cc < 16; cc++) code[k][cc] = $urandom_range(0, 15);
    for (int i = 0; i < 16; i++) L[i] = (i - 8) * 15 + $urandom_range(0, 7);
    for (int k = 0; k < 16; k++)
      for (int cc = 0; cc < 16; cc++) ext_mem[128 + k/4][64*(k%4) + 4*cc +: 4] = 4'(code[k][cc]);
    for (int i = 0; i < 16; i++) ext_mem[132][16*i +: 16] = 16'(L[i]);
    repeat (3) @(negedge clk);
    rst_n = 1;
    c = mk(OP_DMA_RD, 0, GB_WS_BASE);     c.ext_addr = 128; c.len = 4; send(c);
    c = mk(OP_DMA_RD, 0, GB_WS_BASE + 8); c.ext_addr = 132; c.len = 1; send(c);
    c = mk(OP_DMM_LUT, 15, GB_WS_BASE + 8); send(c);

    for (int m = 0; m < 3; m++) begin
      int len, ni, cpi, size;
      bit done_t [8];
      len = (m == 0) ? 128 : (m == 1) ? 50 : 20;
      ni = 1 << m; size = 128 / ni; cpi = 4 / ni;
      // token rows: input g / size, position g % size; padding is 0
      for (int g = 0; g < 128; g++)
        for (int k = 0; k < 16; k++) begin
          X[g][k] = ((g % size) < len) ? $urandom_range(0, 255) - 128 : 0;
          ext_mem[g][16*k +: 16] = 16'(X[g][k]);
        end
      c = mk(OP_DMA_RD, 0, 0); c.ext_addr = 0; c.len = 128; send(c);
      c = mk(OP_SET_LEN, 0, 0); c.len = 16'(len); send(c);
      @(negedge clk);
      n_mode[int'(nb)]++;
      checks++;
      if (int'(nb) != m) begin failures++; $display("len %0d: batch mode %0d", len, nb); end
      // batched schedule from the top's core assignment
      t0 = int'($time);
      load_ws(15);
      for (int t = 0; t < 8; t++) done_t[t] = 0;
      begin
        int q [4][$];
        for (int k = 0; k < 4; k++) begin
          int inp, part;
          inp = int'(core_input[k]); part = int'(core_part[k]);
          for (int t = 0; t < size / 16; t++)
            if (16 * t < len && (t % cpi) == part) q[k].push_back(inp * (size / 16) + t);
        end
        while (q[0].size() + q[1].size() + q[2].size() + q[3].size() > 0) begin
          int tl [4];
          for (int k = 0; k < 4; k++) begin
            tl[k] = (q[k].size() > 0) ? q[k].pop_front() : -1;
            if (tl[k] >= 0) done_t[tl[k]] = 1;
          end
          round(tl);
        end
      end
      cyc_b = (int'($time) - t0) / 10;
      $display("length %0d: %0d input(s), batched schedule %0d cycles", len, ni, cyc_b);
      check_tiles(len, ni, done_t, $sformatf("len %0d batched", len));
      if (m == 2) begin
        // the same inputs one at a time, without batching
        t0 = int'($time);
        for (int i = 0; i < 4; i++) begin
          int tl [4];
          load_ws(3);
          tl = '{2*i, 2*i + 1, -1, -1};
          round(tl);
        end
        cyc_u = (int'($time) - t0) / 10;
        n_idle_rounds -= 4;   // expected in the unbatched run
        $display("length 20 without batching: %0d cycles (batched %0d)", cyc_u, cyc_b);
        checks++;
        if (cyc_b >= cyc_u) begin failures++; $display("batching gave no speed-up"); end
        check_tiles(len, ni, done_t, "len 20 unbatched");
      end
    end

    begin
      string names [5] = '{"rounds with 4 cores busy", "W_S loads", "batch of 1", "batch of 2", "batch of 4"};
      int cnt [5];
      cnt = '{n_full_rounds, n_ws_loads, n_mode[0], n_mode[1], n_mode[2]};
      for (int i = 0; i < 5; i++) begin
        $display("mechanism %-26s %0d", names[i], cnt[i]);
        checks++;
        if (cnt[i] == 0) begin failures++; $display("mechanism never exercised: %s", names[i]); end
      end
      checks++;
      if (n_idle_rounds != 0) begin failures++; $display("%0d batched rounds left a core idle", n_idle_rounds); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
