// dmm_core: dense matrix-multiplication (DMM) core.
//
// Multiplies a 16x16 tile of X (input buffer, a TRF) by a 16x16 tile of W_S
// (input-or-parameter buffer, a TRF) as a sum of outer products: at K step k
// the core reads column k of X and row k of W_S, both in one cycle thanks to
// the two-direction register files, and the 4x4 PEs (each 4x4 MACs) add the
// 16x16 outer product into their accumulators. With b_deq=1 the low 4 bits of
// each W_S entry are a non-uniform code that the LUT dequantizer turns into a
// 16b integer; with b_deq=0 the buffer holds plain 16b activations (QK^T).
// Each K step takes D*D cycles (D = 1, 2, 4 digits for 4/8/16b), so a run of
// k_len steps takes k_len*D*D cycles. The accumulator then drains the 16x16
// result into the 32b output TRF one column per cycle (16 cycles), either
// overwriting it or (acc=1) adding to it, so that several K tiles can be
// summed. done pulses one cycle after the last drain cycle: latency from
// start to done is k_len*D*D + 17 cycles. When idle, the output TRF is read
// through o_dir/o_addr, each 32b value shifted right arithmetically by
// o_shift and saturated to 16b. Loads of the buffers and the LUT are allowed
// only while the core is idle.
// Follows the paper: 16x16 tiles, 4x4 PEs of 4x4 MACs, LUT dequantizer,
// X read column by column, W_S row by row, Y stored column by column.
// This design's choices: the accumulator's add-or-overwrite, the rescaling,
// the command and handshake signals.
module dmm_core
  import trex_pkg::*;
#(
  parameter int unsigned TILE    = 16,
  parameter int unsigned PE_GRID = 4,
  parameter int unsigned PE_DIM  = 4,
  localparam int unsigned AW     = $clog2(TILE)
) (
  input  logic          clk,
  input  logic          rst_n,
  // input buffer (X)
  input  logic          a_we,
  input  logic          a_dir,
  input  logic [AW-1:0] a_addr,
  input  logic [15:0]   a_wdata [TILE],
  // input-or-parameter buffer (W_S codes or activations)
  input  logic          b_we,
  input  logic          b_dir,
  input  logic [AW-1:0] b_addr,
  input  logic [15:0]   b_wdata [TILE],
  // dequantizer LUT
  input  logic          lut_we,
  input  logic [15:0]   lut_wdata [16],
  // run
  input  logic          start,
  input  logic [AW:0]   k_len,
  input  prec_e         prec,
  input  logic          acc,
  input  logic          b_deq,
  output logic          busy,
  output logic          done,
  // output buffer readout
  input  logic          o_dir,
  input  logic [AW-1:0] o_addr,
  input  logic [4:0]    o_shift,
  output logic [15:0]   o_rdata [TILE]
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN, S_DONE} state_e;
  state_e state;

  logic [AW:0]   k;
  logic [AW-1:0] col;
  logic          first;
  prec_e         prec_q;
  logic          acc_q, deq_q;

  // digit schedule
  logic [1:0] di, dj;
  logic       sgn_i, sgn_j, last;
  logic [2:0] shift;
  digit_seq u_seq (
    .clk, .rst_n, .en(state == S_RUN), .prec(prec_q),
    .di, .dj, .sgn_i, .sgn_j, .shift, .last
  );

  // buffers
  logic [15:0] a_col [TILE];
  logic [15:0] b_row [TILE];
  logic [15:0] b_deqv [TILE];
  logic [15:0] b_use [TILE];
  logic [3:0]  b_code [TILE];

  trf #(.N(TILE), .W(16)) u_inbuf (
    .clk, .rst_n, .we(a_we), .wdir(a_dir), .waddr(a_addr), .wdata(a_wdata),
    .rdir(1'b1), .raddr(k[AW-1:0]), .rdata(a_col), .q()
  );
  trf #(.N(TILE), .W(16)) u_parbuf (
    .clk, .rst_n, .we(b_we), .wdir(b_dir), .waddr(b_addr), .wdata(b_wdata),
    .rdir(1'b0), .raddr(k[AW-1:0]), .rdata(b_row), .q()
  );

  always_comb
    for (int i = 0; i < TILE; i++) b_code[i] = b_row[i][3:0];

  nu_dequant #(.LEVELS(16), .LANES(TILE), .OUT_W(16)) u_deq (
    .clk, .rst_n, .lut_we, .lut_wdata, .code(b_code), .value(b_deqv)
  );

  always_comb
    for (int i = 0; i < TILE; i++) b_use[i] = deq_q ? b_deqv[i] : b_row[i];

  // PE array
  logic [31:0] psum [TILE][TILE];
  for (genvar p = 0; p < PE_GRID; p++) begin : g_pr
    for (genvar q = 0; q < PE_GRID; q++) begin : g_pc
      logic [15:0] pa [PE_DIM];
      logic [15:0] pb [PE_DIM];
      logic [31:0] ps [PE_DIM][PE_DIM];
      always_comb begin
        for (int i = 0; i < PE_DIM; i++) begin
          pa[i] = a_col[p*PE_DIM + i];
          pb[i] = b_use[q*PE_DIM + i];
        end
      end
      dmm_pe #(.PE_DIM(PE_DIM)) u_pe (
        .clk, .rst_n, .en(state == S_RUN), .clr(first),
        .a(pa), .b(pb), .di, .dj, .sgn_i, .sgn_j, .shift, .psum(ps)
      );
      always_comb
        for (int i = 0; i < PE_DIM; i++)
          for (int j = 0; j < PE_DIM; j++)
            psum[p*PE_DIM + i][q*PE_DIM + j] = ps[i][j];
    end
  end

  // accumulator and output buffer
  logic          o_we;
  logic [31:0]   o_wdata [TILE];
  logic [31:0]   o_rd32  [TILE];
  logic          o_rdir;
  logic [AW-1:0] o_raddr;

  always_comb begin
    o_we    = (state == S_DRAIN);
    o_rdir  = (state == S_DRAIN) ? 1'b1 : o_dir;
    o_raddr = (state == S_DRAIN) ? col : o_addr;
    for (int i = 0; i < TILE; i++)
      o_wdata[i] = psum[i][col] + (acc_q ? o_rd32[i] : 32'd0);
  end

  trf #(.N(TILE), .W(32)) u_outbuf (
    .clk, .rst_n, .we(o_we), .wdir(1'b1), .waddr(col), .wdata(o_wdata),
    .rdir(o_rdir), .raddr(o_raddr), .rdata(o_rd32), .q()
  );

  always_comb begin
    for (int i = 0; i < TILE; i++) begin
      logic signed [31:0] v;
      v = $signed(o_rd32[i]) >>> o_shift;
      if (v > 32'sd32767)       o_rdata[i] = 16'h7fff;
      else if (v < -32'sd32768) o_rdata[i] = 16'h8000;
      else                      o_rdata[i] = v[15:0];
    end
  end

  // control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      k      <= '0;
      col    <= '0;
      first  <= 1'b0;
      prec_q <= PREC_16;
      acc_q  <= 1'b0;
      deq_q  <= 1'b0;
    end else begin
      case (state)
        S_IDLE: if (start) begin
          state  <= S_RUN;
          k      <= '0;
          first  <= 1'b1;
          prec_q <= prec;
          acc_q  <= acc;
          deq_q  <= b_deq;
        end
        S_RUN: begin
          first <= 1'b0;
          if (last) begin
            if (k == k_len - 1'b1) begin
              state <= S_DRAIN;
              col   <= '0;
            end
            k <= k + 1'b1;
          end
        end
        S_DRAIN: begin
          col <= col + 1'b1;
          if (col == AW'(TILE - 1)) state <= S_DONE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);
  assign done = (state == S_DONE);
endmodule
