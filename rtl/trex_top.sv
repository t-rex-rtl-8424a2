// trex_top: transformer accelerator with factorized, compressed weights.
//
// Each weight matrix of the model is factorized as W = W_S * W_D: a dense
// W_S shared by all layers (stored once on chip, 4b non-uniform codes) and a
// very sparse W_D per layer (fixed number of non-zeros per column, 5b delta
// indices, 6b values). A layer computes (X * W_S) * W_D: the four DMM cores
// do X * W_S in 16x16 tiles, the four SMM cores multiply by the non-zeros of
// W_D, and the two AFUs run softmax, GELU, residual additions and format
// conversions. All units exchange data through the global buffer; the DMA
// fills it from external memory. The batch-control block derives from the
// input length whether one, two or four inputs share a pass (nb), which sets
// the AFUs' segmenting and is reported, with the core-to-input assignment,
// to the host that issues the per-core commands.
//
// Interface: a command port (cmd_valid/cmd_ready/cmd, see trex_pkg and
// trex_ctrl) that stands in for the chip's RISC-V controller, and an
// external memory port (ext_req_*/ext_rsp_*) that stands in for the chip's
// I/O interface. Single clock, active-low asynchronous reset.
// Unit counts (4 DMM, 4 SMM, 2 AFU) follow the paper; the command interface
// is this design's own.
module trex_top
  import trex_pkg::*;
#(
  parameter int unsigned N_DMM = 4,
  parameter int unsigned N_SMM = 4,
  parameter int unsigned N_AFU = 2
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          cmd_valid,
  output logic          cmd_ready,
  input  cmd_t          cmd,
  output logic          busy,
  output logic          ext_req_valid,
  input  logic          ext_req_ready,
  output logic          ext_req_we,
  output logic [23:0]   ext_req_addr,
  output logic [255:0]  ext_req_wdata,
  input  logic          ext_rsp_valid,
  input  logic [255:0]  ext_rsp_rdata,
  output nb_e           nb,
  output logic [1:0]    core_input [4],
  output logic [1:0]    core_part  [4],
  output logic          len_error
);
  // ---------------- global buffer and DMA ----------------
  logic         g0_en, g0_we, g1_en, g1_we;
  logic [15:0]  g0_addr, g1_addr;
  logic [255:0] g0_wdata, g0_rdata, g1_wdata, g1_rdata;

  global_buffer #(.WORD_W(GB_WORD_W), .DEPTH(GB_DEPTH), .AW(GB_AW)) u_gb (
    .clk,
    .p0_en(g0_en), .p0_we(g0_we), .p0_addr(g0_addr), .p0_wdata(g0_wdata), .p0_rdata(g0_rdata),
    .p1_en(g1_en), .p1_we(g1_we), .p1_addr(g1_addr), .p1_wdata(g1_wdata), .p1_rdata(g1_rdata)
  );

  logic        dma_start, dma_dir, dma_busy;
  logic [23:0] dma_ext_addr;
  logic [15:0] dma_gb_addr, dma_len;

  dma #(.WORD_W(GB_WORD_W), .AW(GB_AW), .EAW(24)) u_dma (
    .clk, .rst_n, .start(dma_start), .dir(dma_dir), .ext_addr(dma_ext_addr),
    .gb_addr(dma_gb_addr), .len(dma_len), .busy(dma_busy), .done(),
    .ext_req_valid, .ext_req_ready, .ext_req_we, .ext_req_addr, .ext_req_wdata,
    .ext_rsp_valid, .ext_rsp_rdata,
    .gb_en(g0_en), .gb_we(g0_we), .gb_a(g0_addr), .gb_wdata(g0_wdata), .gb_rdata(g0_rdata)
  );

  // ---------------- dynamic batching ----------------
  logic [7:0] cur_len;
  batch_ctrl #(.N_CORES(4)) u_batch (
    .len(cur_len), .nb, .cores_per_input(), .core_input, .core_part, .too_long(len_error)
  );

  // ---------------- controller ----------------
  logic [N_DMM-1:0] dmm_a_we, dmm_b_we, dmm_lut_we, dmm_start, dmm_busy;
  logic             dmm_dir, dmm_acc, dmm_deq;
  logic [3:0]       dmm_addr;
  logic [15:0]      dmm_wdata [16];
  logic [4:0]       dmm_k_len, dmm_shift;
  prec_e            dmm_prec;
  logic [15:0]      dmm_rdata [N_DMM][16];

  logic [N_SMM-1:0] smm_cfg_we, smm_nz_we, smm_in_we, smm_bias_we, smm_start, smm_busy;
  logic [15:0]      smm_scale, smm_offset;
  logic [2:0]       smm_nz_slot, smm_slot, smm_out_addr, smm_o_addr;
  logic [5:0]       smm_code;
  logic             smm_in_dir, smm_clr, smm_fin, smm_row, smm_o_dir;
  logic [15:0]      smm_in_wdata [8];
  logic [7:0]       smm_bias_addr, smm_bias_base;
  logic [31:0]      smm_bias_wdata;
  prec_e            smm_prec;
  logic [3:0]       smm_nvalid;
  logic [4:0]       smm_shift;
  logic [15:0]      smm_rdata [N_SMM][8];

  logic [N_AFU-1:0] afu_in_we, afu_lut_we, afu_start, afu_busy;
  logic             afu_in_sel, afu_in_hi, afu_beat, afu_lut_sel;
  logic [31:0]      afu_wdata [64];
  logic [7:0]       afu_lut_addr;
  logic [15:0]      afu_lut_wdata;
  afu_op_e          afu_op;
  logic [4:0]       afu_shift;
  logic [31:0]      afu_rdata [N_AFU][64];

  trex_ctrl #(.N_DMM(N_DMM), .N_SMM(N_SMM), .N_AFU(N_AFU)) u_ctrl (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .busy, .cur_len,
    .dma_start, .dma_dir, .dma_ext_addr, .dma_gb_addr, .dma_len, .dma_busy,
    .gb_en(g1_en), .gb_we(g1_we), .gb_addr(g1_addr), .gb_wdata(g1_wdata), .gb_rdata(g1_rdata),
    .dmm_a_we, .dmm_b_we, .dmm_lut_we, .dmm_start, .dmm_dir, .dmm_addr, .dmm_wdata,
    .dmm_k_len, .dmm_prec, .dmm_acc, .dmm_deq, .dmm_shift, .dmm_busy, .dmm_rdata,
    .smm_cfg_we, .smm_nz_we, .smm_in_we, .smm_bias_we, .smm_start, .smm_scale, .smm_offset,
    .smm_nz_slot, .smm_slot, .smm_code, .smm_in_dir, .smm_in_wdata, .smm_bias_addr, .smm_bias_wdata,
    .smm_prec, .smm_clr, .smm_fin, .smm_row, .smm_nvalid, .smm_bias_base, .smm_out_addr,
    .smm_shift, .smm_o_dir, .smm_o_addr, .smm_busy, .smm_rdata,
    .afu_in_we, .afu_lut_we, .afu_start, .afu_in_sel, .afu_in_hi, .afu_beat, .afu_wdata, .afu_lut_sel,
    .afu_lut_addr, .afu_lut_wdata, .afu_op, .afu_shift, .afu_busy, .afu_rdata
  );

  // ---------------- compute units ----------------
  for (genvar d = 0; d < N_DMM; d++) begin : g_dmm
    dmm_core u_dmm (
      .clk, .rst_n,
      .a_we(dmm_a_we[d]), .a_dir(dmm_dir), .a_addr(dmm_addr), .a_wdata(dmm_wdata),
      .b_we(dmm_b_we[d]), .b_dir(dmm_dir), .b_addr(dmm_addr), .b_wdata(dmm_wdata),
      .lut_we(dmm_lut_we[d]), .lut_wdata(dmm_wdata),
      .start(dmm_start[d]), .k_len(dmm_k_len), .prec(dmm_prec), .acc(dmm_acc), .b_deq(dmm_deq),
      .busy(dmm_busy[d]), .done(),
      .o_dir(dmm_dir), .o_addr(dmm_addr), .o_shift(dmm_shift), .o_rdata(dmm_rdata[d])
    );
  end

  for (genvar s = 0; s < N_SMM; s++) begin : g_smm
    smm_core u_smm (
      .clk, .rst_n,
      .cfg_we(smm_cfg_we[s]), .cfg_scale(smm_scale), .cfg_offset(smm_offset),
      .nz_we(smm_nz_we[s]), .nz_slot(smm_nz_slot), .nz_code(smm_code),
      .in_we(smm_in_we[s]), .in_dir(smm_in_dir), .in_slot(smm_slot), .in_wdata(smm_in_wdata),
      .bias_we(smm_bias_we[s]), .bias_addr(smm_bias_addr), .bias_wdata(smm_bias_wdata),
      .start(smm_start[s]), .prec(smm_prec), .clr(smm_clr), .fin(smm_fin), .row_mode(smm_row),
      .nvalid(smm_nvalid), .bias_base(smm_bias_base), .out_addr(smm_out_addr), .out_shift(smm_shift),
      .busy(smm_busy[s]), .done(),
      .o_dir(smm_o_dir), .o_addr(smm_o_addr), .o_rdata(smm_rdata[s])
    );
  end

  for (genvar a = 0; a < N_AFU; a++) begin : g_afu
    afu u_afu (
      .clk, .rst_n,
      .in_we(afu_in_we[a]), .in_sel(afu_in_sel), .in_hi(afu_in_hi), .in_beat(afu_beat), .in_wdata(afu_wdata),
      .lut_we(afu_lut_we[a]), .lut_sel(afu_lut_sel), .lut_addr(afu_lut_addr), .lut_wdata(afu_lut_wdata),
      .start(afu_start[a]), .op(afu_op), .nb, .seg_len(cur_len), .in_shift(afu_shift),
      .busy(afu_busy[a]), .done(),
      .out_beat(afu_beat), .out_rdata(afu_rdata[a])
    );
  end
endmodule
