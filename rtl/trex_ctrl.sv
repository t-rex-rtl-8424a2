// trex_ctrl: top control of the accelerator.
//
// Executes one command (cmd_t, trex_pkg) at a time; cmd_ready is high when it
// is idle. In the chip a RISC-V core issues this work; here the command
// stream comes in through ports. Every command is a memory operation between
// the global buffer (port 1) and one kind of unit, or a start of units:
//   DMA_RD/WR   start the DMA and wait for it.
//   DMM_LDA/LDB read 16 GB words into lines 0..15 of the input (A) or
//               input-or-parameter (B) buffer of every core in unit_mask, in
//               direction dir. With flag_c, B takes 4b W_S codes packed 64
//               per word: line l is the 64b slice l%4 of word gb_addr+l/4.
//   DMM_LUT     one word = 16 levels of the non-uniform dequantizer LUT.
//   DMM_RUN     start the cores (K steps = len, prec, flag_a accumulate,
//               flag_b dequantize B) and wait.
//   DMM_ST      16 lines of the output buffer of the lowest core in the
//               mask (direction dir, right shift shift) to 16 GB words.
//   SMM_BIAS    flag_b=0: 16 biases (16b, sign-extended) into bias entries
//               sel..sel+15; flag_b=1: element 0 = scale (M-m), element 1 =
//               offset m of the uniform dequantizer.
//   SMM_COL     one group of len (<= 8) non-zeros of W_D: the word at
//               gb_addr holds 8 x 16b slots {delta[10:6], code[5:0]}. The
//               relative-address register turns the deltas into indices
//               (reset first when flag_a, i.e. a new column); the input
//               vector of index x is half sub[0] of word gb_addr2 + x. Codes
//               go to the line buffer, vectors to the input buffer. Then the
//               cores run with clr=flag_a, fin=flag_b, row mode=flag_c,
//               bias base sel, output line sub[3:1], shift shift.
//   SMM_ST      8 output-buffer lines (8 x 16b, low half of a word).
//   AFU_LD      8 GB words (128 x 16b, sign-extended) into AFU buffer A
//               (flag_a=0) or B, AFU unit_mask[0] or [1]. With flag_b only
//               the upper 16b of each lane are written (layer-norm gamma
//               over beta, or the high half of a 32b value).
//   AFU_LUT     256 entries from 16 words into the exp (flag_b=0) or GELU LUT.
//   AFU_RUN     start the AFU: op = sel[2:0], in_shift = sub, batch mode
//               from the dynamic-batching block, valid length = set length.
//   AFU_ST      the AFU output (low 16b of each lane) to 8 GB words.
//   SET_LEN     the current input length, which sets the batch mode.
// GB reads have one cycle of latency; a load of N lines takes N+1 cycles.
// The command set is this design's own; the paper gives the units, the
// relative addressing in the top control and that all data movement is by
// memory operations.
module trex_ctrl
  import trex_pkg::*;
#(
  parameter int unsigned N_DMM = 4,
  parameter int unsigned N_SMM = 4,
  parameter int unsigned N_AFU = 2
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  cmd_t              cmd,
  output logic              busy,
  // dynamic batching
  output logic [7:0]        cur_len,
  // DMA
  output logic              dma_start,
  output logic              dma_dir,
  output logic [23:0]       dma_ext_addr,
  output logic [15:0]       dma_gb_addr,
  output logic [15:0]       dma_len,
  input  logic              dma_busy,
  // GB port 1
  output logic              gb_en,
  output logic              gb_we,
  output logic [15:0]       gb_addr,
  output logic [255:0]      gb_wdata,
  input  logic [255:0]      gb_rdata,
  // DMM cores
  output logic [N_DMM-1:0]  dmm_a_we,
  output logic [N_DMM-1:0]  dmm_b_we,
  output logic [N_DMM-1:0]  dmm_lut_we,
  output logic [N_DMM-1:0]  dmm_start,
  output logic              dmm_dir,
  output logic [3:0]        dmm_addr,
  output logic [15:0]       dmm_wdata [16],
  output logic [4:0]        dmm_k_len,
  output prec_e             dmm_prec,
  output logic              dmm_acc,
  output logic              dmm_deq,
  output logic [4:0]        dmm_shift,
  input  logic [N_DMM-1:0]  dmm_busy,
  input  logic [15:0]       dmm_rdata [N_DMM][16],
  // SMM cores
  output logic [N_SMM-1:0]  smm_cfg_we,
  output logic [N_SMM-1:0]  smm_nz_we,
  output logic [N_SMM-1:0]  smm_in_we,
  output logic [N_SMM-1:0]  smm_bias_we,
  output logic [N_SMM-1:0]  smm_start,
  output logic [15:0]       smm_scale,
  output logic [15:0]       smm_offset,
  output logic [2:0]        smm_nz_slot,
  output logic [2:0]        smm_slot,
  output logic [5:0]        smm_code,
  output logic              smm_in_dir,
  output logic [15:0]       smm_in_wdata [8],
  output logic [7:0]        smm_bias_addr,
  output logic [31:0]       smm_bias_wdata,
  output prec_e             smm_prec,
  output logic              smm_clr,
  output logic              smm_fin,
  output logic              smm_row,
  output logic [3:0]        smm_nvalid,
  output logic [7:0]        smm_bias_base,
  output logic [2:0]        smm_out_addr,
  output logic [4:0]        smm_shift,
  output logic              smm_o_dir,
  output logic [2:0]        smm_o_addr,
  input  logic [N_SMM-1:0]  smm_busy,
  input  logic [15:0]       smm_rdata [N_SMM][8],
  // AFUs
  output logic [N_AFU-1:0]  afu_in_we,
  output logic [N_AFU-1:0]  afu_lut_we,
  output logic [N_AFU-1:0]  afu_start,
  output logic              afu_in_sel,
  output logic              afu_in_hi,
  output logic              afu_beat,
  output logic [31:0]       afu_wdata [64],
  output logic              afu_lut_sel,
  output logic [7:0]        afu_lut_addr,
  output logic [15:0]       afu_lut_wdata,
  output afu_op_e           afu_op,
  output logic [4:0]        afu_shift,
  input  logic [N_AFU-1:0]  afu_busy,
  input  logic [31:0]       afu_rdata [N_AFU][64]
);
  typedef enum logic [2:0] {S_IDLE, S_XFER, S_STORE, S_START, S_WAIT, S_NZ} state_e;
  state_e state;

  cmd_t        c;
  logic [8:0]  n;        // transfer length
  logic [8:0]  i;        // issue counter
  logic        rv;       // read data valid this cycle
  logic [8:0]  ri;       // index of the returning read
  logic [1:0]  dsel;     // selected core / AFU for stores
  logic [15:0] nzw [8];  // non-zero slots of the current group
  logic [31:0] stage [64];
  logic        afu_push;
  logic        push_beat;

  function automatic logic [1:0] low_bit(logic [3:0] m);
    for (int b = 0; b < 4; b++) if (m[b]) return 2'(b);
    return 2'd0;
  endfunction

  // word -> 16 x 16b
  logic [15:0] rw [16];
  always_comb for (int e = 0; e < 16; e++) rw[e] = gb_rdata[16*e +: 16];

  // relative addressing of the W_D indices
  logic [7:0] idx;
  logic       ra_step, ra_reset;
  rel_addr_gen u_rel (
    .clk, .rst_n, .reset_col(ra_reset), .step(ra_step),
    .delta(nzw[i[2:0]][10:6]), .addr(idx)
  );

  always_comb begin
    cmd_ready = (state == S_IDLE);
    busy      = (state != S_IDLE);
    // DMA
    dma_start    = (state == S_START) && (c.op == OP_DMA_RD || c.op == OP_DMA_WR);
    dma_dir      = (c.op == OP_DMA_WR);
    dma_ext_addr = c.ext_addr;
    dma_gb_addr  = c.gb_addr;
    dma_len      = c.len;
    // GB port 1
    gb_en    = 1'b0;
    gb_we    = 1'b0;
    gb_addr  = c.gb_addr + 16'(i);
    gb_wdata = '0;
    ra_step  = 1'b0;
    ra_reset = 1'b0;
    if (state == S_XFER && i < n) begin
      gb_en = 1'b1;
      case (c.op)
        OP_DMM_LDB: if (c.flag_c) gb_addr = c.gb_addr + 16'(i >> 2);
        OP_AFU_LUT: gb_addr = c.gb_addr + 16'(i >> 4);
        OP_SMM_BIAS: gb_addr = c.gb_addr;
        OP_SMM_COL: begin
          gb_addr  = c.gb_addr2 + 16'(idx);
          ra_step  = 1'b1;
          ra_reset = c.flag_a && (i == 9'd0);
        end
        default: ;
      endcase
    end
    if (state == S_NZ && i == 9'd0) begin
      gb_en   = 1'b1;
      gb_addr = c.gb_addr;
    end
    if (state == S_STORE) begin
      gb_en = 1'b1;
      gb_we = 1'b1;
      case (c.op)
        OP_DMM_ST: for (int e = 0; e < 16; e++) gb_wdata[16*e +: 16] = dmm_rdata[dsel][e];
        OP_SMM_ST: for (int e = 0; e < 8; e++)  gb_wdata[16*e +: 16] = smm_rdata[dsel][e];
        default:   for (int e = 0; e < 16; e++)
                     gb_wdata[16*e +: 16] = afu_rdata[dsel[0]][16*int'(i[1:0]) + e][15:0];
      endcase
    end
    // DMM
    dmm_a_we   = '0;
    dmm_b_we   = '0;
    dmm_lut_we = '0;
    dmm_start  = '0;
    dmm_dir    = c.dir;
    dmm_addr   = (state == S_STORE) ? i[3:0] : ri[3:0];
    for (int e = 0; e < 16; e++)
      dmm_wdata[e] = (c.op == OP_DMM_LDB && c.flag_c) ? {12'd0, gb_rdata[64*int'(ri[1:0]) + 4*e +: 4]} : rw[e];
    dmm_k_len  = c.len[4:0];
    dmm_prec   = c.prec;
    dmm_acc    = c.flag_a;
    dmm_deq    = c.flag_b;
    dmm_shift  = c.shift;
    if (rv) begin
      case (c.op)
        OP_DMM_LDA: dmm_a_we   = c.unit_mask[N_DMM-1:0];
        OP_DMM_LDB: dmm_b_we   = c.unit_mask[N_DMM-1:0];
        OP_DMM_LUT: dmm_lut_we = c.unit_mask[N_DMM-1:0];
        default: ;
      endcase
    end
    if (state == S_START && c.op == OP_DMM_RUN) dmm_start = c.unit_mask[N_DMM-1:0];
    // SMM
    smm_cfg_we     = '0;
    smm_nz_we      = '0;
    smm_in_we      = '0;
    smm_bias_we    = '0;
    smm_start      = '0;
    smm_scale      = rw[0];
    smm_offset     = rw[1];
    smm_nz_slot    = i[2:0];
    smm_slot       = ri[2:0];
    smm_code       = nzw[i[2:0]][5:0];
    smm_in_dir     = ~c.flag_c;
    for (int e = 0; e < 8; e++) smm_in_wdata[e] = rw[8*int'(c.sub[0]) + e];
    smm_bias_addr  = c.sel + 8'(ri);
    smm_bias_wdata = 32'($signed(rw[ri[3:0]]));
    smm_prec       = c.prec;
    smm_clr        = c.flag_a;
    smm_fin        = c.flag_b;
    smm_row        = c.flag_c;
    smm_nvalid     = c.len[3:0];
    smm_bias_base  = c.sel;
    smm_out_addr   = c.sub[3:1];
    smm_shift      = c.shift;
    smm_o_dir      = c.dir;
    smm_o_addr     = i[2:0];
    if (state == S_XFER && c.op == OP_SMM_COL && i < n) begin
      smm_nz_we = c.unit_mask[N_SMM-1:0];
    end
    if (rv) begin
      case (c.op)
        OP_SMM_COL:  begin
          smm_in_we = c.unit_mask[N_SMM-1:0];
        end
        OP_SMM_BIAS: if (c.flag_b) smm_cfg_we = c.unit_mask[N_SMM-1:0];
                     else          smm_bias_we = c.unit_mask[N_SMM-1:0];
        default: ;
      endcase
    end
    if (state == S_START && c.op == OP_SMM_COL) smm_start = c.unit_mask[N_SMM-1:0];
    // AFU
    afu_in_we     = afu_push ? c.unit_mask[N_AFU-1:0] : '0;
    afu_lut_we    = (rv && c.op == OP_AFU_LUT) ? c.unit_mask[N_AFU-1:0] : '0;
    afu_start     = (state == S_START && c.op == OP_AFU_RUN) ? c.unit_mask[N_AFU-1:0] : '0;
    afu_in_sel    = c.flag_a;
    afu_in_hi     = c.flag_b;
    afu_beat      = (state == S_STORE) ? i[2] : push_beat;
    afu_wdata     = stage;
    afu_lut_sel   = c.flag_b;
    afu_lut_addr  = ri[7:0];
    afu_lut_wdata = rw[ri[3:0]];
    afu_op        = afu_op_e'(c.sel[2:0]);
    afu_shift     = c.sub;
  end

  // length of the GB-to-unit transfer of each command
  function automatic logic [8:0] xfer_len(cmd_t x);
    case (x.op)
      OP_DMM_LDA, OP_DMM_LDB: return 9'd16;
      OP_DMM_LUT:             return 9'd1;
      OP_SMM_BIAS:            return x.flag_b ? 9'd1 : 9'd16;
      OP_SMM_COL:             return 9'(x.len[3:0]);
      OP_AFU_LD:              return 9'd8;
      OP_AFU_LUT:             return 9'd256;
      OP_DMM_ST:              return 9'd16;
      default:                return 9'd8;    // SMM_ST, AFU_ST
    endcase
  endfunction

  logic units_busy;
  always_comb begin
    case (c.op)
      OP_DMM_RUN: units_busy = |(dmm_busy & c.unit_mask[N_DMM-1:0]);
      OP_SMM_COL: units_busy = |(smm_busy & c.unit_mask[N_SMM-1:0]);
      OP_AFU_RUN: units_busy = |(afu_busy & c.unit_mask[N_AFU-1:0]);
      default:    units_busy = dma_busy;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      c        <= '0;
      n        <= '0;
      i        <= '0;
      rv       <= 1'b0;
      ri       <= '0;
      dsel     <= '0;
      cur_len  <= 8'd128;
      afu_push <= 1'b0;
      push_beat <= 1'b0;
      for (int k = 0; k < 8; k++)  nzw[k]   <= '0;
      for (int k = 0; k < 64; k++) stage[k] <= '0;
    end else begin
      rv       <= (state == S_XFER) && (i < n);
      ri       <= i;
      afu_push <= rv && (c.op == OP_AFU_LD) && (ri[1:0] == 2'd3);
      push_beat <= ri[2];
      if (rv && c.op == OP_AFU_LD)
        for (int e = 0; e < 16; e++) stage[16*int'(ri[1:0]) + e] <= 32'($signed(rw[e]));
      case (state)
        S_IDLE: if (cmd_valid) begin
          c    <= cmd;
          n    <= xfer_len(cmd);
          i    <= '0;
          dsel <= low_bit(cmd.unit_mask);
          case (cmd.op)
            OP_DMA_RD, OP_DMA_WR, OP_DMM_RUN, OP_AFU_RUN: state <= S_START;
            OP_DMM_LDA, OP_DMM_LDB, OP_DMM_LUT, OP_SMM_BIAS,
            OP_AFU_LD, OP_AFU_LUT:                        state <= S_XFER;
            OP_SMM_COL:                                   state <= S_NZ;
            OP_DMM_ST, OP_SMM_ST, OP_AFU_ST:              state <= S_STORE;
            OP_SET_LEN: cur_len <= cmd.len[7:0];
            default: ;
          endcase
        end
        S_NZ: begin
          // cycle 0: read the slot word; cycle 1: latch it
          i <= i + 1'b1;
          if (i == 9'd1) begin
            for (int k = 0; k < 8; k++) nzw[k] <= rw[k];
            i     <= '0;
            state <= S_XFER;
          end
        end
        S_XFER: begin
          if (i < n) i <= i + 1'b1;
          // done once the last read has returned (and been pushed)
          if (i >= n && !rv && !afu_push) begin
            i     <= '0;
            state <= (c.op == OP_SMM_COL) ? S_START : S_IDLE;
          end
        end
        S_STORE: begin
          i <= i + 1'b1;
          if (i == n - 1'b1) state <= S_IDLE;
        end
        S_START: state <= S_WAIT;
        S_WAIT:  if (!units_busy) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
