// digit_seq: walks the digit pairs of one multi-cycle MAC step.
//
// For precision prec (one, two or four 4b digits per operand) it produces the
// D*D digit pairs (di, dj), one per cycle while en is high, and raises last on
// the final pair. sgn_i/sgn_j mark the most significant digits (signed) and
// shift = di + dj is the weight of the pair in 4-bit steps. Used by the DMM and
// SMM cores to drive all their MAC units with one shared schedule.
module digit_seq
  import trex_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       en,
  input  prec_e      prec,
  output logic [1:0] di,
  output logic [1:0] dj,
  output logic       sgn_i,
  output logic       sgn_j,
  output logic [2:0] shift,
  output logic       last
);
  logic [1:0] dmax;

  always_comb begin
    dmax  = 2'(prec_digits(prec) - 1);
    sgn_i = (di == dmax);
    sgn_j = (dj == dmax);
    shift = 3'(di) + 3'(dj);
    last  = sgn_i & sgn_j;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      di <= '0;
      dj <= '0;
    end else if (en) begin
      if (dj == dmax) begin
        dj <= '0;
        di <= (di == dmax) ? 2'd0 : di + 2'd1;
      end else begin
        dj <= dj + 2'd1;
      end
    end
  end
endmodule
