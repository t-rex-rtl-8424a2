// mac_unit: digit-serial multiply-accumulate unit shared by the DMM and SMM cores.
//
// Each cycle with en=1 the unit multiplies one 4b digit of each operand and
// adds the product, shifted left by 4*shift bits, into a 32b partial sum. A
// 16b x 16b product is formed from its 16 digit pairs in 16 cycles, 8b x 8b in
// 4 cycles and 4b x 4b in one, as in the paper. Operands are two's complement:
// the caller marks the most significant digit of an operand as signed
// (sgn1/sgn2) and all lower digits are unsigned, so the multiplier is 5b x 5b.
// clr restarts the sum: with en it loads the shifted product, without en it
// clears to zero. Because every product carries its own weight, partial sums
// of several K steps share one accumulator and the digit order is free.
// The 4b multiplier, the shifter in 4-bit steps and the 32b accumulator
// follow the paper; the signed-digit scheme and the placement of the shifter
// on the product are this design's choice. Result: psum valid the cycle
// after the last enabled step. Overflow wraps modulo 2^32.
module mac_unit #(
  parameter int unsigned ACC_W = 32,
  parameter int unsigned DIG_W = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,
  input  logic             clr,
  input  logic [DIG_W-1:0] in1,
  input  logic [DIG_W-1:0] in2,
  input  logic             sgn1,
  input  logic             sgn2,
  input  logic [2:0]       shift,
  output logic [ACC_W-1:0] psum
);
  logic signed [DIG_W:0]     x1, x2;
  logic signed [2*DIG_W+1:0] prod;
  logic [ACC_W-1:0]          prod_ext, prod_sh;

  always_comb begin
    x1       = $signed({sgn1 & in1[DIG_W-1], in1});
    x2       = $signed({sgn2 & in2[DIG_W-1], in2});
    prod     = x1 * x2;
    prod_ext = ACC_W'($signed(prod));
    prod_sh  = prod_ext << (DIG_W * shift);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       psum <= '0;
    else if (clr)     psum <= en ? prod_sh : '0;
    else if (en)      psum <= psum + prod_sh;
  end
endmodule
