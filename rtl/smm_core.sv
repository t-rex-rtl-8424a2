// smm_core: sparse matrix-multiplication (SMM) core.
//
// Computes products with the sparse, compressed W_D using only its
// non-zeros, on R x C (8x8) MAC units. One group of up to C non-zeros is
// processed at a time. For each non-zero slot k the controller writes its 6b
// code into the sparse line buffer (nz_*; the uniform dequantizer turns it
// into 16b with the layer scale and offset held in cfg registers) and writes
// the input vector the non-zero selects into line k of the input TRF (in_*):
// in column-product mode a sub-column of Y = X*W_S (rows s*R .. s*R+R-1 of
// the column named by the non-zero's row index), in row-product mode a row
// segment of the dense right-hand matrix. MAC (r,k) multiplies input element
// r of line k by non-zero k; slots at or above nvalid are idle. A run takes
// D*D cycles (D digits of the precision). With clr the MACs restart,
// otherwise they keep accumulating, so more than C non-zeros per output
// line are split into several groups. With fin the accumulator adds the C
// MACs of each row, the post-bias adder adds the bias (column product: one
// bias entry bias_base for the whole output column; row product: entry
// bias_base+r for element r), the sum is shifted right by out_shift,
// saturated to 16b and written into line out_addr of the output TRF: as a
// column in column-product mode (Z stored column-wise) and as a row in
// row-product mode. done pulses D*D+1 cycles (D*D+2 with fin) after start.
// Follows the paper: 8x8 MACs identical to the DMM ones, line buffer, uniform
// dequantizer, bias buffer, accumulator, post-bias adder, TRF buffers,
// row/column-product switching. This design's choices: the MAC mapping, the
// group size, the bias format (32b) and the output rescaling.
module smm_core
  import trex_pkg::*;
#(
  parameter int unsigned R          = 8,
  parameter int unsigned C          = 8,
  parameter int unsigned BIAS_DEPTH = 256,
  localparam int unsigned RW        = $clog2(R),
  localparam int unsigned CW        = $clog2(C),
  localparam int unsigned BW        = $clog2(BIAS_DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  // layer dequantization settings (scale M-m, offset m)
  input  logic          cfg_we,
  input  logic [15:0]   cfg_scale,
  input  logic [15:0]   cfg_offset,
  // sparse line buffer
  input  logic          nz_we,
  input  logic [CW-1:0] nz_slot,
  input  logic [5:0]    nz_code,
  // input buffer
  input  logic          in_we,
  input  logic          in_dir,
  input  logic [CW-1:0] in_slot,
  input  logic [15:0]   in_wdata [R],
  // bias buffer
  input  logic          bias_we,
  input  logic [BW-1:0] bias_addr,
  input  logic [31:0]   bias_wdata,
  // run
  input  logic          start,
  input  prec_e         prec,
  input  logic          clr,
  input  logic          fin,
  input  logic          row_mode,
  input  logic [CW:0]   nvalid,
  input  logic [BW-1:0] bias_base,
  input  logic [RW-1:0] out_addr,
  input  logic [4:0]    out_shift,
  output logic          busy,
  output logic          done,
  // output buffer readout
  input  logic          o_dir,
  input  logic [RW-1:0] o_addr,
  output logic [15:0]   o_rdata [R]
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_FIN, S_DONE} state_e;
  state_e state;

  logic [15:0] scale_q, offset_q;
  logic [15:0] linebuf [C];
  logic [31:0] bias_mem [BIAS_DEPTH];
  logic [15:0] nz_val;

  prec_e         prec_q;
  logic          fin_q, row_q, first;
  logic [CW:0]   nvalid_q;
  logic [BW-1:0] bias_base_q;
  logic [RW-1:0] out_addr_q;
  logic [4:0]    out_shift_q;

  uniform_dequant u_udq (.code(nz_code), .scale(scale_q), .offset(offset_q), .value(nz_val));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      scale_q  <= '0;
      offset_q <= '0;
      for (int k = 0; k < C; k++) linebuf[k] <= '0;
    end else begin
      if (cfg_we) begin
        scale_q  <= cfg_scale;
        offset_q <= cfg_offset;
      end
      if (nz_we) linebuf[nz_slot] <= nz_val;
    end
  end

  always_ff @(posedge clk) begin
    if (bias_we) bias_mem[bias_addr] <= bias_wdata;
  end

  // input buffer: line k holds the input vector of non-zero k. The direction
  // of the last write tells how the lines are laid out; all lines of one
  // group are written in the same direction.
  logic in_dir_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     in_dir_q <= 1'b1;
    else if (in_we) in_dir_q <= in_dir;
  end

  logic [15:0] in_q [R][R];
  trf #(.N(R), .W(16)) u_inbuf (
    .clk, .rst_n, .we(in_we), .wdir(in_dir), .waddr(in_slot), .wdata(in_wdata),
    .rdir(1'b0), .raddr('0), .rdata(), .q(in_q)
  );

  // digit schedule
  logic [1:0] di, dj;
  logic       sgn_i, sgn_j, last;
  logic [2:0] shift;
  digit_seq u_seq (
    .clk, .rst_n, .en(state == S_RUN), .prec(prec_q),
    .di, .dj, .sgn_i, .sgn_j, .shift, .last
  );

  // MAC array: row r, column k
  logic [31:0] psum [R][C];
  for (genvar r = 0; r < R; r++) begin : g_r
    for (genvar k = 0; k < C; k++) begin : g_k
      logic [15:0] x;
      // in_dir=1 stores vectors as columns (element r of line k at [r][k]);
      // in_dir=0 stores them as rows ([k][r]).
      assign x = in_dir_q ? in_q[r][k] : in_q[k][r];
      mac_unit u_mac (
        .clk, .rst_n,
        .en((state == S_RUN) && (k < nvalid_q)),
        .clr(first),
        .in1(4'(x >> (4 * di))),
        .in2(4'(linebuf[k] >> (4 * dj))),
        .sgn1(sgn_i), .sgn2(sgn_j), .shift,
        .psum(psum[r][k])
      );
    end
  end

  // accumulator, post-bias adder, output buffer
  logic [15:0] o_wdata [R];
  always_comb begin
    for (int r = 0; r < R; r++) begin
      logic signed [31:0] s;
      s = '0;
      for (int k = 0; k < C; k++) s = s + $signed(psum[r][k]);
      s = s + $signed(bias_mem[row_q ? bias_base_q + BW'(r) : bias_base_q]);
      s = s >>> out_shift_q;
      if (s > 32'sd32767)       o_wdata[r] = 16'h7fff;
      else if (s < -32'sd32768) o_wdata[r] = 16'h8000;
      else                      o_wdata[r] = s[15:0];
    end
  end

  trf #(.N(R), .W(16)) u_outbuf (
    .clk, .rst_n, .we(state == S_FIN), .wdir(~row_q), .waddr(out_addr_q), .wdata(o_wdata),
    .rdir(o_dir), .raddr(o_addr), .rdata(o_rdata), .q()
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      prec_q      <= PREC_16;
      fin_q       <= 1'b0;
      row_q       <= 1'b0;
      first       <= 1'b0;
      nvalid_q    <= '0;
      bias_base_q <= '0;
      out_addr_q  <= '0;
      out_shift_q <= '0;
    end else begin
      case (state)
        S_IDLE: if (start) begin
          state       <= S_RUN;
          prec_q      <= prec;
          first       <= clr;
          fin_q       <= fin;
          row_q       <= row_mode;
          nvalid_q    <= nvalid;
          bias_base_q <= bias_base;
          out_addr_q  <= out_addr;
          out_shift_q <= out_shift;
        end
        S_RUN: begin
          first <= 1'b0;
          if (last) state <= fin_q ? S_FIN : S_DONE;
        end
        S_FIN:   state <= S_DONE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);
  assign done = (state == S_DONE);
endmodule
