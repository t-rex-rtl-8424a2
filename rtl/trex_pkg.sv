// trex_pkg: types and constants shared by the accelerator blocks.
//
// Precision modes of the digit-serial MACs (a 16b operand is four 4b digits,
// an 8b operand two, a 4b operand one), dynamic-batching modes (one, two or
// four inputs per pass), AFU operations and the controller's command format.
// The numeric sizes (4x4 PEs of 4x4 MACs, 16x16 tiles, 8x8 SMM MACs, a
// 128-token maximum input) follow the paper; the encodings, the command set
// and the global-buffer word width are this design's own choices.
package trex_pkg;

  typedef enum logic [1:0] {
    PREC_4  = 2'd0,
    PREC_8  = 2'd1,
    PREC_16 = 2'd2
  } prec_e;

  // Number of 4b digits per operand in each precision.
  function automatic int unsigned prec_digits(prec_e p);
    case (p)
      PREC_4:  return 1;
      PREC_8:  return 2;
      default: return 4;
    endcase
  endfunction

  // Dynamic batching: how many inputs share one pass over the parameters.
  typedef enum logic [1:0] {
    NB_1 = 2'd0,
    NB_2 = 2'd1,
    NB_4 = 2'd2
  } nb_e;

  localparam int unsigned MAX_LEN = 128;

  typedef enum logic [2:0] {
    AFU_SOFTMAX  = 3'd0,
    AFU_GELU     = 3'd1,
    AFU_RESIDUAL = 3'd2,
    AFU_INT2BF   = 3'd3,
    AFU_BF2INT   = 3'd4,
    AFU_LN_STAT  = 3'd5,
    AFU_LN_NORM  = 3'd6,
    AFU_LN_APPLY = 3'd7
  } afu_op_e;

  // Global buffer: one word is one 16-element line of 16b values.
  localparam int unsigned GB_WORD_W = 256;
  localparam int unsigned GB_DEPTH  = 40960;           // 1280 kB
  localparam int unsigned GB_AW     = 16;
  // Region bases (word addresses): I/O #0, I/O #1, encoder output, shared
  // parameters (W_S), distinct parameters (W_D of one layer).
  localparam int unsigned GB_IO0_BASE = 0;
  localparam int unsigned GB_IO1_BASE = 8192;
  localparam int unsigned GB_ENC_BASE = 16384;
  localparam int unsigned GB_WS_BASE  = 20480;
  localparam int unsigned GB_WD_BASE  = 32768;

  // Controller commands.
  typedef enum logic [3:0] {
    OP_NOP      = 4'd0,
    OP_DMA_RD   = 4'd1,   // external memory -> GB
    OP_DMA_WR   = 4'd2,   // GB -> external memory
    OP_DMM_LDA  = 4'd3,   // 16 GB words -> DMM input buffer
    OP_DMM_LDB  = 4'd4,   // 16 GB words -> DMM input-or-parameter buffer
    OP_DMM_LUT  = 4'd5,   // 1 GB word   -> DMM dequantizer LUT
    OP_DMM_RUN  = 4'd6,   // tile multiply
    OP_DMM_ST   = 4'd7,   // DMM output buffer -> 16 GB words
    OP_SMM_BIAS = 4'd8,   // 1 GB word (16 x 16b) -> 16 bias entries
    OP_SMM_COL  = 4'd9,   // one group of <=8 non-zeros of W_D: load, multiply, accumulate
    OP_SMM_ST   = 4'd10,  // SMM output buffer -> 8 GB words (low half)
    OP_AFU_LD   = 4'd11,  // 8 GB words -> AFU buffer A or B
    OP_AFU_LUT  = 4'd12,  // 16 GB words -> 256 LUT entries
    OP_AFU_RUN  = 4'd13,
    OP_AFU_ST   = 4'd14,  // AFU output -> 8 GB words (low 16b of each lane)
    OP_SET_LEN  = 4'd15   // input length for dynamic batching
  } opcode_e;

  typedef struct packed {
    opcode_e     op;
    logic [3:0]  unit_mask;   // which DMM/SMM cores (one bit each) or AFU (bit 0/1)
    logic [15:0] gb_addr;     // primary GB address
    logic [15:0] gb_addr2;    // secondary GB address (SMM input base)
    logic [23:0] ext_addr;    // external word address (DMA)
    logic [15:0] len;         // words (DMA), K steps (DMM), non-zeros (SMM), length (SET_LEN)
    logic        dir;         // TRF direction: 0 row, 1 column
    logic        flag_a;      // DMM: accumulate; SMM: clear MACs first; AFU: buffer B
    logic        flag_b;      // DMM: dequantize B; SMM: finish (bias, write out); AFU LUT: GELU
    logic        flag_c;      // SMM: row-product mode; DMM_LDB: load low 4 bits as codes
    prec_e       prec;
    logic [4:0]  shift;       // output rescale shift
    logic [7:0]  sel;         // SMM: output line / bias base; AFU: op and in_shift
    logic [4:0]  sub;         // SMM: sub-block of the input vector; AFU: in_shift
  } cmd_t;

endpackage
