// tb_dmm_core: self-checking test of the dense matrix-multiplication core.
// 1) 16b activations: X and B loaded row by row, K=16, output read by
//    columns and by rows, compared with a reference product.
// 2) 8b, W_S as 4b codes through a random dequantizer LUT, B loaded column
//    by column, K=16.
// 3) 4b, K=5, accumulated (acc=1) onto the result of run 2.
// The latency start->done of every run is checked against K*D*D + 17.
module tb_dmm_core;
  import trex_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic a_we = 0, a_dir = 0, b_we = 0, b_dir = 0, lut_we = 0;
  logic [3:0] a_addr = 0, b_addr = 0, o_addr = 0;
  logic [15:0] a_wdata [16], b_wdata [16], lut_wdata [16], o_rdata [16];
  logic start = 0, acc = 0, b_deq = 0, busy, done, o_dir = 0;
  logic [4:0] k_len = 16, o_shift = 0;
  prec_e prec = PREC_16;

  dmm_core dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [15:0] X [16][16], B [16][16], L [16];
  longint      Y [16][16];

  function automatic longint sext(logic [15:0] v, int w);
    longint r;
    r = longint'(v) & ((longint'(1) << w) - 1);
    if (r >= (longint'(1) << (w - 1))) r -= (longint'(1) << w);
    return r;
  endfunction

  function automatic logic [15:0] scaled(longint v, int sh);
    int signed s32;
    s32 = int'(v);          // the core keeps 32b sums
    s32 = s32 >>> sh;
    if (s32 > 32767) return 16'h7fff;
    if (s32 < -32768) return 16'h8000;
    return 16'(s32);
  endfunction

  task automatic load(input bit which_b, input bit dir);
    for (int l = 0; l < 16; l++) begin
      @(negedge clk);
      for (int e = 0; e < 16; e++) begin
        if (!which_b) a_wdata[e] = dir ? X[e][l] : X[l][e];
        else          b_wdata[e] = dir ? B[e][l] : B[l][e];
      end
      if (!which_b) begin a_we = 1; a_dir = dir; a_addr = 4'(l); end
      else          begin b_we = 1; b_dir = dir; b_addr = 4'(l); end
    end
    @(negedge clk);
    a_we = 0; b_we = 0;
  endtask

  task automatic run(input prec_e p, input int k, input bit ac, input bit dq);
    int cyc, d;
    d = prec_digits(p);
    @(negedge clk);
    prec = p; k_len = 5'(k); acc = ac; b_deq = dq; start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != k*d*d + 17) begin failures++; $display("latency %0d expected %0d", cyc, k*d*d + 17); end
    @(negedge clk);
  endtask

  task automatic compare(input int sh, input string tag);
    o_shift = 5'(sh);
    for (int dir = 0; dir < 2; dir++)
      for (int l = 0; l < 16; l++) begin
        o_dir = 1'(dir); o_addr = 4'(l);
        #1;
        for (int e = 0; e < 16; e++) begin
          logic [15:0] expv;
          expv = dir ? scaled(Y[e][l], sh) : scaled(Y[l][e], sh);
          checks++;
          if (o_rdata[e] !== expv) begin
            failures++;
            if (failures < 10) $display("%s dir %0d line %0d elem %0d: %h expected %h", tag, dir, l, e, o_rdata[e], expv);
          end
        end
      end
  endtask

  initial begin
    for (int e = 0; e < 16; e++) begin a_wdata[e] = 0; b_wdata[e] = 0; lut_wdata[e] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    // 1) 16b activations x activations
    for (int r = 0; r < 16; r++) for (int c = 0; c < 16; c++) begin
      X[r][c] = 16'($urandom); B[r][c] = 16'($urandom);
    end
    load(0, 0); load(1, 0);
    run(PREC_16, 16, 0, 0);
    for (int r = 0; r < 16; r++) for (int c = 0; c < 16; c++) begin
      Y[r][c] = 0;
      for (int k = 0; k < 16; k++) Y[r][c] += sext(X[r][k], 16) * sext(B[k][c], 16);
    end
    compare(20, "16b");
    // 2) 8b with dequantized W_S
    for (int i = 0; i < 16; i++) L[i] = 16'(int'($urandom_range(0, 255)) - 128);
    @(negedge clk);
    lut_wdata = L; lut_we = 1;
    @(negedge clk);
    lut_we = 0;
    for (int r = 0; r < 16; r++) for (int c = 0; c < 16; c++) begin
      X[r][c] = 16'($urandom); B[r][c] = 16'($urandom_range(0, 15)) | 16'h00f0; // upper bits ignored
    end
    load(0, 1); load(1, 1);
    run(PREC_8, 16, 0, 1);
    for (int r = 0; r < 16; r++) for (int c = 0; c < 16; c++) begin
      Y[r][c] = 0;
      for (int k = 0; k < 16; k++) Y[r][c] += sext(X[r][k], 8) * sext(L[B[k][c][3:0]], 8);
    end
    compare(4, "8b-deq");
    // 3) 4b, 5 K steps, accumulated
    for (int r = 0; r < 16; r++) for (int c = 0; c < 16; c++) begin
      X[r][c] = 16'($urandom); B[r][c] = 16'($urandom);
    end
    load(0, 0); load(1, 1);
    run(PREC_4, 5, 1, 0);
    for (int r = 0; r < 16; r++) for (int c = 0; c < 16; c++)
      for (int k = 0; k < 5; k++) Y[r][c] += sext(X[r][k], 4) * sext(B[k][c], 4);
    compare(2, "4b-acc");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
