// dmm_pe: processing element of a dense matrix-multiplication core.
//
// Holds PE_DIM x PE_DIM MAC units and computes an outer product: MAC (r,c)
// accumulates a[r] * b[c], where a is a slice of a column of X and b a slice
// of a row of W_S. One digit pair (di, dj) of the current operands is
// multiplied per cycle; the digit selection is done once here and shared by
// all MACs. In 4b and 8b precision the low 4 or 8 bits of each 16b lane hold
// the operand. en/clr/shift/sgn_i/sgn_j come from the core's digit sequencer.
// psum[r][c] is registered in the MACs and valid one cycle after the last step.
// The 4x4 MACs and the outer-product organisation follow the paper.
module dmm_pe #(
  parameter int unsigned PE_DIM = 4,
  parameter int unsigned DATA_W = 16,
  parameter int unsigned ACC_W  = 32
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,
  input  logic                    clr,
  input  logic [DATA_W-1:0]       a [PE_DIM],
  input  logic [DATA_W-1:0]       b [PE_DIM],
  input  logic [1:0]              di,
  input  logic [1:0]              dj,
  input  logic                    sgn_i,
  input  logic                    sgn_j,
  input  logic [2:0]              shift,
  output logic [ACC_W-1:0]        psum [PE_DIM][PE_DIM]
);
  logic [3:0] a_dig [PE_DIM];
  logic [3:0] b_dig [PE_DIM];

  always_comb begin
    for (int i = 0; i < PE_DIM; i++) begin
      a_dig[i] = 4'(a[i] >> (4 * di));
      b_dig[i] = 4'(b[i] >> (4 * dj));
    end
  end

  for (genvar r = 0; r < PE_DIM; r++) begin : g_row
    for (genvar c = 0; c < PE_DIM; c++) begin : g_col
      mac_unit #(.ACC_W(ACC_W)) u_mac (
        .clk, .rst_n, .en, .clr,
        .in1(a_dig[r]), .in2(b_dig[c]),
        .sgn1(sgn_i), .sgn2(sgn_j), .shift,
        .psum(psum[r][c])
      );
    end
  end
endmodule
