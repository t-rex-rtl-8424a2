// rel_addr_gen: relative addressing for delta-encoded W_D indices.
//
// The row indices of the non-zeros in a column of W_D are stored as 5b
// differences between consecutive indices (the first relative to zero).
// Instead of decoding them, the controller keeps a current-address register:
// each step adds the next delta, and the sum addresses the matching input
// vector directly. reset_col starts a new column. addr is combinational
// (current address plus the incoming delta) so the load for a non-zero can be
// issued in the same cycle as its delta; the register updates on step.
// Follows the paper's current-address register with adder and reset; widths
// 5b delta and 8b index are the paper's.
module rel_addr_gen #(
  parameter int unsigned DELTA_W = 5,
  parameter int unsigned IDX_W   = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               reset_col,
  input  logic               step,
  input  logic [DELTA_W-1:0] delta,
  output logic [IDX_W-1:0]   addr
);
  logic [IDX_W-1:0] cur;

  assign addr = (reset_col ? '0 : cur) + IDX_W'(delta);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         cur <= '0;
    else if (step)      cur <= addr;
    else if (reset_col) cur <= '0;
  end
endmodule
