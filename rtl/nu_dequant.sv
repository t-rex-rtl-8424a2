// nu_dequant: LUT-based non-uniform dequantizer of the DMM cores.
//
// W_S is stored with 4b codes that index LEVELS non-uniformly spaced levels.
// The LUT holds the 16b integer value of each level and is reloaded whenever
// a different W_S (encoder/decoder, attention/feed-forward) comes in: lut_we
// writes all levels at once from lut_wdata. Every cycle LANES codes are
// translated combinationally, one row of a 16x16 W_S tile. Level count, 4b
// code and 16b output follow the paper; the whole-table reload is this
// design's choice. Levels reset to zero.
module nu_dequant #(
  parameter int unsigned LEVELS = 16,
  parameter int unsigned LANES  = 16,
  parameter int unsigned OUT_W  = 16,
  localparam int unsigned CW    = $clog2(LEVELS)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             lut_we,
  input  logic [OUT_W-1:0] lut_wdata [LEVELS],
  input  logic [CW-1:0]    code  [LANES],
  output logic [OUT_W-1:0] value [LANES]
);
  logic [OUT_W-1:0] level [LEVELS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LEVELS; i++) level[i] <= '0;
    end else if (lut_we) begin
      for (int i = 0; i < LEVELS; i++) level[i] <= lut_wdata[i];
    end
  end

  always_comb begin
    for (int i = 0; i < LANES; i++) value[i] = level[code[i]];
  end
endmodule
