// batch_ctrl: dynamic batching configuration.
//
// The accelerator is sized for inputs of up to MAX_LEN (128) tokens. When an
// input is at most half (a quarter) of that, two (four) inputs are processed
// in one pass so that every parameter fetched from memory is used two (four)
// times and the cores stay busy. From the current input length len this
// block selects the batch mode (65..128 tokens: one input, 33..64: two,
// 1..32: four) and tells each of the N_CORES DMM/SMM core pairs which input
// it serves (core_input) and which part of that input's work it takes
// (core_part, 0 .. cores_per_input-1). With one input all four cores share
// it and their SMM partial results are summed (matrix addition); with two,
// cores 0-1 and 2-3 pair up; with four, each core has its own input.
// too_long flags len > MAX_LEN or len = 0. Combinational.
// The thresholds and the core assignment follow the paper.
module batch_ctrl
  import trex_pkg::*;
#(
  parameter int unsigned N_CORES = 4
) (
  input  logic [7:0] len,
  output nb_e        nb,
  output logic [2:0] cores_per_input,
  output logic [1:0] core_input [N_CORES],
  output logic [1:0] core_part  [N_CORES],
  output logic       too_long
);
  always_comb begin
    too_long = (int'(len) > MAX_LEN) || (len == 8'd0);
    if (int'(len) > MAX_LEN / 2)      nb = NB_1;
    else if (int'(len) > MAX_LEN / 4) nb = NB_2;
    else                              nb = NB_4;
    case (nb)
      NB_1:    cores_per_input = 3'(N_CORES);
      NB_2:    cores_per_input = 3'(N_CORES / 2);
      default: cores_per_input = 3'(N_CORES / 4);
    endcase
    for (int c = 0; c < N_CORES; c++) begin
      core_input[c] = 2'(c / int'(cores_per_input));
      core_part[c]  = 2'(c % int'(cores_per_input));
    end
  end
endmodule
