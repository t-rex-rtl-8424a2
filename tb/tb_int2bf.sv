// tb_int2bf: self-checking test of the INT32->BF16 and BF16->INT32
// converters. References are computed through real arithmetic: the integer
// is scaled to 8 significant bits and rounded to nearest even; the BF16
// value is evaluated exactly and truncated toward zero with saturation.
module tb_int2bf;
  int checks = 0, failures = 0;
  logic [31:0] i, io;
  logic [15:0] f, fi;

  int2bf u_i2b (.i(i), .f(f));
  bf2int u_b2i (.f(fi), .i(io));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [15:0] ref_i2b(int x);
    real r, q, m;
    int ex;
    longint mant;
    r = (x < 0) ? -real'(x) : real'(x);
    if (r == 0.0) return 16'h0;
    ex = 0;
    while (r >= $pow(2.0, real'(ex + 1))) ex++;
    q = r / $pow(2.0, real'(ex - 7));
    mant = longint'($floor(q));
    m = q - real'(mant);
    if (m > 0.5 || (m == 0.5 && mant[0])) mant++;
    if (mant == 256) begin mant = 128; ex++; end
    return {x < 0, 8'(ex + 127), 7'(mant)};
  endfunction

  function automatic logic [31:0] ref_b2i(logic [15:0] b);
    real v;
    if (b[14:7] == 8'hff) return b[15] ? 32'h80000000 : 32'h7fffffff;
    if (b[14:7] == 8'h00) return 32'h0;
    v = (1.0 + real'(b[6:0]) / 128.0) * $pow(2.0, real'(int'(b[14:7]) - 127));
    if (b[15]) v = -v;
    if (v >= 2147483647.0) return 32'h7fffffff;
    if (v <= -2147483648.0) return 32'h80000000;
    return 32'($rtoi(v));
  endfunction

  initial begin
    int vals [8] = '{0, 1, -1, 383, 385, 32'h7fffffff, 32'h80000000, 255};
    for (int t = 0; t < 3000; t++) begin
      i = (t < 8) ? 32'(vals[t]) : ($urandom >> $urandom_range(0, 31));
      if (t >= 8 && t % 2 == 1) i = -i;
      fi = 16'($urandom);
      if (t < 8) fi = (t == 0) ? 16'h3f80 : (t == 1) ? 16'hbf80 : (t == 2) ? 16'h4f00 : (t == 3) ? 16'hcf00 :
                      (t == 4) ? 16'h7f80 : (t == 5) ? 16'h3f00 : (t == 6) ? 16'h4780 : 16'h0000;
      #1;
      checks += 2;
      if (f !== ref_i2b(int'(i))) begin
        failures++;
        $display("int2bf(%0d) = %h expected %h", $signed(i), f, ref_i2b(int'(i)));
      end
      if (io !== ref_b2i(fi)) begin
        failures++;
        $display("bf2int(%h) = %0d expected %0d", fi, $signed(io), $signed(ref_b2i(fi)));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
