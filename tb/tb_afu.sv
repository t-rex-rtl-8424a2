// tb_afu: self-checking test of the auxiliary function unit.
// Loads an exponential LUT (65535*exp(-i/16)) and a GELU LUT, then checks
// softmax rows in all three batch modes (one input of 100 valid tokens, two
// of 50, four of 20) against a reference computed in the testbench with the
// same integer recipe (per-input max, LUT exponent, per-input sum,
// reciprocal, product). Also GELU, saturating residual addition and the
// INT32<->BF16 converters (reference via real arithmetic), and layer
// normalization: statistics gathered over two rows of a two-input batch,
// LN_NORM on the first row and LN_APPLY on the second, a full row whose
// normalized values are also compared with real arithmetic (0.5 %), and a
// constant row (zero variance). Latencies: 7 cycles for softmax, 37 for
// LN_NORM, 3 for the other operations.
module tb_afu;
  import trex_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_we = 0, in_sel = 0, in_hi = 0, in_beat = 0, lut_we = 0, lut_sel = 0, start = 0, busy, done, out_beat = 0;
  logic [31:0] in_wdata [64], out_rdata [64];
  logic [7:0] lut_addr = 0, seg_len = 0;
  logic [15:0] lut_wdata = 0;
  afu_op_e op = AFU_SOFTMAX;
  nb_e nb = NB_1;
  logic [4:0] in_shift = 0;

  afu dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int explut [256], gelulut [256];
  int A [128], Bv [128];
  longint expo [128];

  function automatic real gelu(real x);
    return 0.5 * x * (1.0 + $tanh(0.7978845608 * (x + 0.044715 * x * x * x)));
  endfunction

  function automatic longint isqrt(longint v);
    longint lo, hi, mid;
    lo = 0; hi = 64'd4294967295;
    while (lo < hi) begin
      mid = (lo + hi + 1) / 2;
      if (mid * mid <= v) lo = mid; else hi = mid - 1;
    end
    return lo;
  endfunction

  task automatic load_row(input bit sel, input int v [128]);
    for (int b = 0; b < 2; b++) begin
      @(negedge clk);
      in_we = 1; in_sel = sel; in_beat = 1'(b);
      for (int l = 0; l < 64; l++) in_wdata[l] = 32'(v[64*b + l]);
    end
    @(negedge clk);
    in_we = 0;
  endtask

  task automatic go(input afu_op_e o, input nb_e n, input int len, input int sh, input int lat);
    int cyc;
    @(negedge clk);
    op = o; nb = n; seg_len = 8'(len); in_shift = 5'(sh); start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != lat) begin failures++; $display("op %0d latency %0d expected %0d", o, cyc, lat); end
  endtask

  task automatic check_out(input string tag);
    for (int b = 0; b < 2; b++) begin
      out_beat = 1'(b);
      #1;
      for (int l = 0; l < 64; l++) begin
        checks++;
        if (out_rdata[l] !== 32'(expo[64*b + l])) begin
          failures++;
          if (failures < 12) $display("%s pos %0d: %0d expected %0d (a %0d b %0d)", tag, 64*b + l, $signed(out_rdata[l]), expo[64*b + l], A[64*b+l], Bv[64*b+l]);
        end
      end
    end
  endtask

  task automatic softmax_ref(input int nbi, input int len, input int sh);
    int size;
    size = 128 / nbi;
    for (int s = 0; s < nbi; s++) begin
      int mx;
      longint sum, recip;
      longint e [128];
      mx = -32'sd2147483647 - 1;
      for (int p = s*size; p < s*size + len; p++) if (A[p] > mx) mx = A[p];
      sum = 0;
      for (int p = s*size; p < (s+1)*size; p++) begin
        int idx;
        idx = (mx - A[p]) >>> sh;
        if (idx > 255) idx = 255;
        e[p] = (p < s*size + len) ? explut[idx] : 0;
        sum += e[p];
      end
      recip = (longint'(1) << 32) / sum;
      for (int p = s*size; p < (s+1)*size; p++) begin
        expo[p] = (e[p] * recip) >> 16;
        if (expo[p] > 65535) expo[p] = 65535;
      end
    end
  endtask

  initial begin
    for (int l = 0; l < 64; l++) in_wdata[l] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 256; i++) begin
      explut[i]  = int'(65535.0 * $exp(-real'(i) / 16.0));
      gelulut[i] = int'(gelu(real'((i - 128) * 16)));
    end
    for (int t = 0; t < 2; t++)
      for (int i = 0; i < 256; i++) begin
        @(negedge clk);
        lut_we = 1; lut_sel = 1'(t); lut_addr = 8'(i);
        lut_wdata = 16'(t ? gelulut[i] : explut[i]);
      end
    @(negedge clk);
    lut_we = 0;
    // softmax in the three batch modes
    for (int m = 0; m < 3; m++) begin
      int nbi, len;
      nbi = 1 << m;
      len = (m == 0) ? 100 : (m == 1) ? 50 : 20;
      for (int p = 0; p < 128; p++) A[p] = $urandom_range(0, 4000) - 2000;
      load_row(0, A);
      go(AFU_SOFTMAX, nb_e'(m), len, 4, 7);
      softmax_ref(nbi, len, 4);
      check_out($sformatf("softmax nb=%0d", nbi));
    end
    // GELU
    for (int p = 0; p < 128; p++) A[p] = $urandom_range(0, 6000) - 3000;
    load_row(0, A);
    go(AFU_GELU, NB_1, 128, 4, 3);
    for (int p = 0; p < 128; p++) begin
      int t;
      t = A[p] >>> 4;
      expo[p] = (t > 127) ? A[p] : (t < -128) ? 0 : longint'(int'(16'(gelulut[t + 128])) << 16 >>> 16);
    end
    check_out("gelu");
    // residual addition with saturation
    for (int p = 0; p < 128; p++) begin A[p] = int'($urandom); Bv[p] = int'($urandom); end
    load_row(0, A); load_row(1, Bv);
    go(AFU_RESIDUAL, NB_1, 128, 0, 3);
    for (int p = 0; p < 128; p++) begin
      longint s;
      s = longint'(A[p]) + longint'(Bv[p]);
      if (s > 64'sd2147483647) s = 64'sd2147483647;
      if (s < -64'sd2147483648) s = -64'sd2147483648;
      expo[p] = s;
    end
    check_out("residual");
    // INT32 -> BF16: reference rounds the exact value through real arithmetic
    for (int p = 0; p < 128; p++) A[p] = (p < 4) ? (p == 0 ? 0 : p == 1 ? -1 : p == 2 ? 2147483647 : 383) : int'($urandom) >>> $urandom_range(0, 30);
    load_row(0, A);
    go(AFU_INT2BF, NB_1, 128, 0, 3);
    for (int p = 0; p < 128; p++) begin
      real r, q, m;
      int  ex;
      longint mant;
      r = (A[p] < 0) ? -real'(A[p]) : real'(A[p]);
      if (r == 0.0) expo[p] = 0;
      else begin
        ex = 0;
        while (r >= $pow(2.0, real'(ex + 1))) ex++;
        q = r / $pow(2.0, real'(ex - 7));          // 8 significant bits before the point
        mant = longint'($floor(q));
        m = q - real'(mant);
        if (m > 0.5 || (m == 0.5 && mant[0])) mant++;
        if (mant == 256) begin mant = 128; ex++; end
        expo[p] = longint'({A[p] < 0, 8'(ex + 127), 7'(mant)});
      end
    end
    check_out("int2bf");
    // BF16 -> INT32: truncation toward zero, saturation
    for (int p = 0; p < 128; p++) begin
      logic [15:0] f;
      f = 16'($urandom);
      f[14:7] = 8'($urandom_range(110, 165));
      A[p] = int'(f);
    end
    load_row(0, A);
    go(AFU_BF2INT, NB_1, 128, 0, 3);
    for (int p = 0; p < 128; p++) begin
      logic [15:0] f;
      real v;
      f = 16'(A[p]);
      v = (1.0 + real'(f[6:0]) / 128.0) * $pow(2.0, real'(int'(f[14:7]) - 127));
      if (f[15]) v = -v;
      if (v >= 2147483647.0) expo[p] = 32'h7fffffff;
      else if (v <= -2147483648.0) expo[p] = 32'h80000000;
      else expo[p] = longint'(32'($rtoi(v)));
    end
    check_out("bf2int");
    // layer normalization: statistics over two rows, LN_NORM on the first,
    // LN_APPLY on the second; then one full row; then a constant row
    for (int t = 0; t < 3; t++) begin
      nb_e    n;
      int     nbi, len, rows, sh;
      int     R [2][128];
      longint mean [4], rstd [4];
      n    = (t == 0) ? NB_2 : NB_1;
      nbi  = (t == 0) ? 2 : 1;
      len  = (t == 0) ? 50 : 128;
      rows = (t == 0) ? 2 : 1;
      sh   = (t == 1) ? 2 : 0;
      for (int r = 0; r < rows; r++)
        for (int p = 0; p < 128; p++)
          R[r][p] = (t == 2) ? 777 : $urandom_range(0, 6000) - 3000 + (p / 64) * 500;
      for (int p = 0; p < 128; p++)
        Bv[p] = (t == 1) ? int'({16'd4096, 16'd0}) : int'({16'($urandom_range(2048, 8192)), 16'($urandom_range(0, 8191) - 4096)});
      for (int r = 0; r < rows; r++) begin
        A = R[r];
        load_row(0, A);
        go(AFU_LN_STAT, n, len, 0, 3);
      end
      // reference statistics, per input
      for (int s = 0; s < nbi; s++) begin
        longint sum, cnt, root, rad, var2;
        logic [71:0] sq;
        int size;
        size = 128 / nbi;
        sum = 0; sq = 0; cnt = 0;
        for (int r = 0; r < rows; r++)
          for (int p = s*size; p < s*size + len; p++) begin
            sum += R[r][p];
            sq  += 72'(longint'(R[r][p]) * longint'(R[r][p]));
            cnt++;
          end
        mean[s] = sum / cnt;
        var2 = longint'(sq / 72'(cnt)) - mean[s] * mean[s];
        if (var2 < 0) var2 = 0;
        rad = var2 << 16;
        root = isqrt(rad);
        rstd[s] = (root == 0) ? 0 : (longint'(1) << 48) / root;
        if (t == 1) begin
          // the normalized values must match real arithmetic to 0.5 %
          real m, sd;
          m  = real'(sum) / real'(cnt);
          sd = 0.0;
          for (int p = 0; p < 128; p++) sd += (real'(R[0][p]) - m) ** 2;
          sd = $sqrt(sd / 128.0);
          for (int p = 0; p < 128; p += 9) begin
            real ideal, got;
            ideal = (real'(R[0][p]) - m) / sd;
            got   = real'(longint'((longint'(R[0][p]) - mean[s]) * rstd[s]) >>> 24) / 65536.0;
            checks++;
            if (got - ideal > 0.005 * (1.0 + (ideal < 0 ? -ideal : ideal)) || ideal - got > 0.005 * (1.0 + (ideal < 0 ? -ideal : ideal))) begin
              failures++;
              $display("layernorm pos %0d: %f ideal %f", p, got, ideal);
            end
          end
        end
      end
      for (int r = 0; r < rows; r++) begin
        A = R[r];
        load_row(0, A);
        load_row(1, Bv);
        if (r == 0) go(AFU_LN_NORM, n, len, sh, 37);
        else        go(AFU_LN_APPLY, n, len, sh, 3);
        for (int p = 0; p < 128; p++) begin
          int s;
          longint nv, y;
          s  = p / (128 / nbi);
          nv = ((longint'(A[p]) - mean[s]) * rstd[s]) >>> 24;
          y  = (nv * longint'($signed(Bv[p][31:16]))) >>> 12;
          y  = (y + (longint'($signed(Bv[p][15:0])) <<< 4)) >>> sh;
          if (y > 64'sd2147483647) y = 64'sd2147483647;
          if (y < -64'sd2147483647 - 1) y = -64'sd2147483647 - 1;
          expo[p] = ((p % (128 / nbi)) < len) ? longint'(32'(y)) : 0;
        end
        check_out($sformatf("layernorm t=%0d row %0d", t, r));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
