// bf2int: BF16 to INT32 converter of the AFU.
//
// Converts a bfloat16 value to a signed 32b integer, truncating toward zero
// and saturating to the INT32 range (infinities and NaNs saturate by sign).
// Combinational. The converter is named in the paper; truncation and
// saturation are this design's choices.
module bf2int (
  input  logic [15:0] f,
  output logic [31:0] i
);
  logic        s;
  logic [7:0]  e;
  logic [31:0] mag;
  logic [7:0]  sh;

  always_comb begin
    s   = f[15];
    e   = f[14:7];
    mag = '0;
    sh  = '0;
    if (e < 8'd127) begin
      i = '0;
    end else if (e >= 8'd158) begin
      i = s ? 32'h8000_0000 : 32'h7fff_ffff;
    end else begin
      sh  = e - 8'd127;                       // 0 .. 30
      mag = {24'd0, 1'b1, f[6:0]};
      mag = (sh >= 8'd7) ? (mag << (sh - 8'd7)) : (mag >> (8'd7 - sh));
      i   = s ? (~mag + 32'd1) : mag;
    end
  end
endmodule
