// int2bf: INT32 to BF16 converter of the AFU.
//
// Converts a signed 32b integer to bfloat16 (1 sign, 8 exponent bits with
// bias 127, 7 mantissa bits), rounding to nearest, ties to even. Zero maps to
// +0. Combinational. The converter itself is named in the paper; the
// rounding rule is this design's choice.
module int2bf (
  input  logic [31:0] i,
  output logic [15:0] f
);
  logic        s;
  logic [31:0] a, m;
  logic [4:0]  p;
  logic [7:0]  e;
  logic [7:0]  mant;   // 7 bits plus carry
  logic        g, st;

  always_comb begin
    s = i[31];
    a = s ? (~i + 32'd1) : i;
    p = '0;
    for (int b = 0; b < 32; b++) if (a[b]) p = 5'(b);
    m    = a << (5'd31 - p);
    g    = m[23];
    st   = |m[22:0];
    mant = {1'b0, m[30:24]};
    e    = 8'd127 + 8'(p);
    if (g && (st || mant[0])) mant = mant + 8'd1;
    if (mant[7]) begin
      mant = '0;
      e    = e + 8'd1;
    end
    f = (a == '0) ? 16'h0000 : {s, e, mant[6:0]};
  end
endmodule
