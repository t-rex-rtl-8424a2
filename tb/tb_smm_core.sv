// tb_smm_core: self-checking test of the sparse matrix-multiplication core.
// 1) Column product, 16b: two groups of non-zeros (8 then 5) of one W_D
//    column accumulate into the MACs; the second group finishes with bias and
//    writes a column of the output buffer.
// 2) Row product, 8b: one group of 8, per-element biases, result written as
//    a row. Non-zero values are 6b codes; the testbench dequantizes them with
//    its own integer formula. Outputs are read back in both directions and
//    the start->done latency is checked (D*D+1, D*D+2 with fin).
module tb_smm_core;
  import trex_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cfg_we = 0, nz_we = 0, in_we = 0, in_dir = 1, bias_we = 0;
  logic [15:0] cfg_scale = 0, cfg_offset = 0;
  logic [2:0] nz_slot = 0, in_slot = 0, out_addr = 0, o_addr = 0;
  logic [5:0] nz_code = 0;
  logic [15:0] in_wdata [8], o_rdata [8];
  logic [7:0] bias_addr = 0, bias_base = 0;
  logic [31:0] bias_wdata = 0;
  logic start = 0, clr = 0, fin = 0, row_mode = 0, busy, done, o_dir = 0;
  prec_e prec = PREC_16;
  logic [3:0] nvalid = 0;
  logic [4:0] out_shift = 0;

  smm_core dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int scale, offs;
  int bias [256];
  longint acc [8];

  function automatic longint sext(logic [15:0] v, int w);
    longint r;
    r = longint'(v) & ((longint'(1) << w) - 1);
    if (r >= (longint'(1) << (w - 1))) r -= (longint'(1) << w);
    return r;
  endfunction

  function automatic logic [15:0] deq(int cv);
    longint e;
    e = longint'(cv) * scale;
    e = (e >= 0) ? e / 32 : -((-e + 31) / 32);
    if (cv > 0) e += offs; else if (cv < 0) e -= offs; else e = 0;
    if (e > 32767) e = 32767;
    if (e < -32768) e = -32768;
    return 16'(e);
  endfunction

  function automatic logic [15:0] scaled(longint v, int sh);
    int signed s32;
    s32 = int'(v);
    s32 = s32 >>> sh;
    if (s32 > 32767) return 16'h7fff;
    if (s32 < -32768) return 16'h8000;
    return 16'(s32);
  endfunction

  task automatic group(input int n, input bit dir, input int w);
    for (int k = 0; k < n; k++) begin
      int cv;
      logic [15:0] v [8];
      cv = $urandom_range(0, 63) - 32;
      for (int r = 0; r < 8; r++) v[r] = 16'($urandom);
      @(negedge clk);
      nz_we = 1; nz_slot = 3'(k); nz_code = 6'(cv);
      in_we = 1; in_dir = dir; in_slot = 3'(k); in_wdata = v;
      for (int r = 0; r < 8; r++) acc[r] += sext(v[r], w) * sext(deq(cv), w);
    end
    @(negedge clk);
    nz_we = 0; in_we = 0;
  endtask

  task automatic run(input prec_e p, input int n, input bit c, input bit f, input bit rm,
                     input int bb, input int oa, input int sh);
    int cyc, d;
    d = prec_digits(p);
    @(negedge clk);
    prec = p; nvalid = 4'(n); clr = c; fin = f; row_mode = rm; bias_base = 8'(bb);
    out_addr = 3'(oa); out_shift = 5'(sh); start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != d*d + 1 + int'(f)) begin failures++; $display("latency %0d", cyc); end
  endtask

  task automatic check_line(input bit dir, input int line, input int sh, input bit per_elem, input int bb, input string tag);
    // the result line, read in its own direction
    o_dir = dir; o_addr = 3'(line);
    #1;
    for (int r = 0; r < 8; r++) begin
      logic [15:0] e;
      e = scaled(acc[r] + bias[per_elem ? bb + r : bb], sh);
      checks++;
      if (o_rdata[r] !== e) begin
        failures++;
        $display("%s elem %0d: %h expected %h", tag, r, o_rdata[r], e);
      end
    end
    // and one element of it in the other direction
    o_dir = ~dir; o_addr = 3'(5);
    #1;
    checks++;
    if (o_rdata[line] !== scaled(acc[5] + bias[per_elem ? bb + 5 : bb], sh)) begin
      failures++;
      $display("%s cross-direction read", tag);
    end
  endtask

  initial begin
    for (int r = 0; r < 8; r++) in_wdata[r] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    scale = $urandom_range(1000, 30000);
    offs  = $urandom_range(0, 2000);
    @(negedge clk);
    cfg_we = 1; cfg_scale = 16'(scale); cfg_offset = 16'(offs);
    for (int i = 0; i < 256; i++) begin
      @(negedge clk);
      cfg_we = 0;
      bias[i] = $urandom_range(0, 200000) - 100000;
      bias_we = 1; bias_addr = 8'(i); bias_wdata = 32'(bias[i]);
    end
    @(negedge clk);
    bias_we = 0;
    // 1) column product, two groups
    for (int r = 0; r < 8; r++) acc[r] = 0;
    group(8, 1, 16);
    run(PREC_16, 8, 1, 0, 0, 0, 0, 0);
    group(5, 1, 16);
    run(PREC_16, 5, 0, 1, 0, 7, 3, 14);
    check_line(1, 3, 14, 0, 7, "col");
    // 2) row product, 8b
    for (int r = 0; r < 8; r++) acc[r] = 0;
    group(8, 0, 8);
    run(PREC_8, 8, 1, 1, 1, 10, 2, 4);
    check_line(0, 2, 4, 1, 10, "row");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
