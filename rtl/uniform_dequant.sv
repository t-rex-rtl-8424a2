// uniform_dequant: restores the 6b uniformly quantized values of W_D to 16b.
//
// Before quantization each non-zero of W_D was shifted toward zero by the
// layer's smallest magnitude m (positives by -m, negatives by +m), so the
// codes cover only the populated range [m, M]. Dequantization scales the
// signed code by the layer scale (M-m) and shifts the result back by +m or -m
// according to its sign: value = ((code * scale) >>> FRAC) + sign(code) * m,
// saturated to 16b. A zero code gives zero. Purely combinational.
// The use of scale (M-m), offset m and the sign-dependent shift follows the
// paper; the fixed-point step (FRAC=5, i.e. code 31 maps to about M) is this
// design's choice.
module uniform_dequant #(
  parameter int unsigned CODE_W = 6,
  parameter int unsigned OUT_W  = 16,
  parameter int unsigned FRAC   = 5
) (
  input  logic [CODE_W-1:0] code,
  input  logic [OUT_W-1:0]  scale,
  input  logic [OUT_W-1:0]  offset,
  output logic [OUT_W-1:0]  value
);
  logic signed [CODE_W-1:0] c;
  logic signed [31:0]       prod, v;

  always_comb begin
    c    = $signed(code);
    prod = 32'(c) * $signed({16'd0, scale});
    v    = prod >>> FRAC;
    if (c > 0)      v = v + $signed({16'd0, offset});
    else if (c < 0) v = v - $signed({16'd0, offset});
    else            v = '0;
    if (v > 32'sd32767)       value = 16'h7fff;
    else if (v < -32'sd32768) value = 16'h8000;
    else                      value = v[OUT_W-1:0];
  end
endmodule
