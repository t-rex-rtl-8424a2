// afu: auxiliary function unit.
//
// Runs the non-matrix layers on one row of up to ROW (128) values: softmax,
// layer normalization, GELU, residual addition and INT32<->BF16 conversion.
// The row sits in input buffer A (B holds the residual operand or the
// layer-norm gamma/beta), written LANES (64) values per beat through in_*
// (in_hi writes only the upper halves, so a 32b value or a packed
// gamma/beta pair can be built from two 16b loads); results go to the
// output buffer, read LANES values per beat through out_beat/out_rdata.
// All lanes work in parallel (one integer unit per lane), so each pass over
// the row takes ROW/LANES = 2 cycles.
//
// Softmax with dynamic batching: the row is split into SEGS (4) quarters of
// 32 positions, each with its own max and sum unit. A row holds one input of
// up to 128 tokens (nb=NB_1), two of up to 64 (NB_2) or four of up to 32
// (NB_4); the combining tree joins the quarter results of one input (all four,
// pairs, or none). Positions at or beyond seg_len within their input are
// masked out. Pass 1 finds each input's maximum; pass 2 looks up
// e = EXP_LUT[min(255, (max - x) >> in_shift)] and sums it; pass 3 uses one
// divider per quarter to form recip = floor(2^32 / sum) and writes
// p = min(65535, (e * recip) >> 16), an unsigned Q0.16 probability.
// done pulses 7 cycles after start (3 passes of 2 beats, then done).
//
// GELU: t = x >>> in_shift; for t in [-128, 127] the result is the
// sign-extended GELU_LUT[t + 128], above the range x itself, below it 0.
// Residual: saturating 32b add A + B. INT2BF / BF2INT: per-lane converters,
// BF16 in the low 16 bits of a lane. These take 2 cycles, done after 3.
//
// Layer normalization, in three operations so that a vector longer than
// one row (a hidden dimension of 768 or 1024) can be normalized row by row.
// LN_STAT adds sum(x), sum(x*x) and the count of the valid positions of the
// row to per-quarter statistics registers (done after 3 cycles). LN_NORM
// joins the quarters of each input like the softmax tree, forms
// mean = sum / n and var = sum(x*x) / n - mean^2 (truncating divisions),
// clears the statistics, takes s = isqrt(min(var, 2^48-1) << 16) with a
// 2-bit-per-cycle integer square root (32 cycles), rstd = floor(2^48 / s),
// and normalizes the row in buffer A; LN_APPLY normalizes a further row with
// the same mean and rstd (done after 3 cycles). Per position,
//   n = ((x - mean) * rstd) >>> 24          (normalized value, Q.16)
//   y = (((n * gamma) >>> 12) + (beta <<< 4)) >>> in_shift, saturated,
// with gamma = B[31:16] and beta = B[15:0], both signed Q4.12, taken from
// buffer B. Masked positions give 0; var = 0 gives rstd = 0 (y = beta).
// LN_NORM is done 37 cycles after start.
//
// LUTs (256 x 16b each, exponential and GELU) are written through lut_*.
// Follows the paper: input/output buffers, exponential and GELU LUTs, 64
// integer lanes, four sum units joined according to the batch mode, four
// dividers, the BF16<->INT32 converters, and the list of operations
// (softmax, layer normalization, GELU, residual). Not built: the 16
// floating-point units. Index formats, masking, the reciprocal division and
// the whole layer-normalization recipe (statistics split over several rows,
// integer square root, gamma/beta packing) are this design's choices.
module afu
  import trex_pkg::*;
#(
  parameter int unsigned LANES = 64,
  parameter int unsigned ROW   = 128,
  parameter int unsigned SEGS  = 4,
  localparam int unsigned BEATS = ROW / LANES,
  localparam int unsigned QLEN  = ROW / SEGS,
  localparam int unsigned BTW   = (BEATS > 1) ? $clog2(BEATS) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_we,
  input  logic           in_sel,     // 0: buffer A, 1: buffer B
  input  logic           in_hi,      // 1: write only bits 31:16 (from in_wdata[15:0])
  input  logic [BTW-1:0] in_beat,
  input  logic [31:0]    in_wdata [LANES],
  input  logic           lut_we,
  input  logic           lut_sel,    // 0: exponential, 1: GELU
  input  logic [7:0]     lut_addr,
  input  logic [15:0]    lut_wdata,
  input  logic           start,
  input  afu_op_e        op,
  input  nb_e            nb,
  input  logic [7:0]     seg_len,
  input  logic [4:0]     in_shift,
  output logic           busy,
  output logic           done,
  input  logic [BTW-1:0] out_beat,
  output logic [31:0]    out_rdata [LANES]
);
  typedef enum logic [3:0] {S_IDLE, S_MAX, S_EXP, S_DIV, S_OP, S_DONE,
                            S_LNS, S_LNM, S_SQRT, S_RCP, S_LNA} state_e;
  state_e state;

  logic [31:0] buf_a [ROW];
  logic [31:0] buf_b [ROW];
  logic [31:0] buf_o [ROW];
  logic [15:0] exp_lut  [256];
  logic [15:0] gelu_lut [256];

  afu_op_e        op_q;
  nb_e            nb_q;
  logic [7:0]     len_q;
  logic [4:0]     sh_q;
  logic [BTW-1:0] beat;

  logic signed [31:0] qmax [SEGS];
  logic [31:0]        qsum [SEGS];

  // layer-normalization statistics (per quarter) and derived values
  logic signed [47:0] ln_sum  [SEGS];
  logic [71:0]        ln_sq   [SEGS];
  logic [15:0]        ln_cnt  [SEGS];
  logic signed [47:0] ln_mean [SEGS];
  logic [47:0]        ln_rstd [SEGS];   // <= 2^40, since s >= 256
  logic [63:0]        sq_rad  [SEGS];
  logic [35:0]        sq_rem  [SEGS];
  logic [31:0]        sq_root [SEGS];
  logic [4:0]         sq_cnt;

  // ---- position bookkeeping -------------------------------------------
  function automatic int unsigned in_size(nb_e n);
    case (n)
      NB_1:    return ROW;
      NB_2:    return ROW / 2;
      default: return ROW / 4;
    endcase
  endfunction

  // quarters that belong to the same input as quarter q
  function automatic logic same_input(nb_e n, int unsigned q, int unsigned r);
    case (n)
      NB_1:    return 1'b1;
      NB_2:    return (q / 2) == (r / 2);
      default: return q == r;
    endcase
  endfunction

  // combining tree (Fig. "dynamic batching"): per-input max and sum
  logic signed [31:0] smax [SEGS];
  logic [31:0]        ssum [SEGS];
  logic [32:0]        recip [SEGS];
  always_comb begin
    for (int q = 0; q < SEGS; q++) begin
      smax[q] = 32'sh8000_0000;
      ssum[q] = '0;
      for (int r = 0; r < SEGS; r++) begin
        if (same_input(nb_q, q, r)) begin
          if (qmax[r] > smax[q]) smax[q] = qmax[r];
          ssum[q] = ssum[q] + qsum[r];
        end
      end
      recip[q] = (ssum[q] == 0) ? 33'd0 : 33'((64'd1 << 32) / 64'(ssum[q]));
    end
  end

  // ---- lane datapath ----------------------------------------------------
  logic [31:0]        lane_res [LANES];
  logic               lane_ok  [LANES];
  logic [31:0]        bf_out   [LANES];
  logic [15:0]        i2b_out  [LANES];
  logic signed [31:0] beat_max [SEGS];
  logic [31:0]        beat_sum [SEGS];
  logic signed [47:0] beat_lsum [SEGS];
  logic [71:0]        beat_lsq  [SEGS];
  logic [15:0]        beat_lcnt [SEGS];

  // LN_NORM: per-input mean and variance from the quarter statistics
  logic signed [47:0] c_mean [SEGS];
  logic [63:0]        c_rad  [SEGS];
  always_comb begin
    for (int q = 0; q < SEGS; q++) begin
      logic signed [47:0] s;
      logic [71:0]        sq, ex2;
      logic [16:0]        n;
      logic signed [95:0] m2, v;
      s  = '0;
      sq = '0;
      n  = '0;
      for (int r = 0; r < SEGS; r++)
        if (same_input(nb_q, q, r)) begin
          s  = s + ln_sum[r];
          sq = sq + ln_sq[r];
          n  = n + 17'(ln_cnt[r]);
        end
      c_mean[q] = (n == 0) ? '0 : s / $signed({31'd0, n});
      ex2       = (n == 0) ? '0 : sq / {55'd0, n};
      m2        = 96'(c_mean[q]) * 96'(c_mean[q]);
      v         = $signed({24'd0, ex2}) - m2;
      if (v < 0)                             c_rad[q] = '0;
      else if (v > 96'sh0000_FFFF_FFFF_FFFF) c_rad[q] = 64'hFFFF_FFFF_FFFF_0000;
      else                                   c_rad[q] = {v[47:0], 16'd0};
    end
  end

  for (genvar l = 0; l < LANES; l++) begin : g_conv
    int2bf u_i2b (.i(buf_a[int'(beat) * LANES + l]), .f(i2b_out[l]));
    bf2int u_b2i (.f(buf_a[int'(beat) * LANES + l][15:0]), .i(bf_out[l]));
  end

  always_comb begin
    for (int q = 0; q < SEGS; q++) begin
      beat_max[q]  = 32'sh8000_0000;
      beat_sum[q]  = '0;
      beat_lsum[q] = '0;
      beat_lsq[q]  = '0;
      beat_lcnt[q] = '0;
    end
    for (int l = 0; l < LANES; l++) begin
      int unsigned        p, q;
      logic signed [31:0] x, d, t;
      logic [31:0]        idx;
      logic [32:0]        rs;
      logic [63:0]        pr;
      logic signed [33:0] dd;
      logic signed [75:0] pn;
      logic signed [39:0] nn;
      logic signed [63:0] yy;
      dd = '0;
      pn = '0;
      nn = '0;
      yy = '0;
      d  = '0;
      t  = '0;
      idx = '0;
      rs = '0;
      pr = '0;
      p  = int'(beat) * LANES + l;
      q  = p / QLEN;
      x  = $signed(buf_a[p]);
      lane_ok[l]  = (p % in_size(nb_q)) < int'(len_q);
      lane_res[l] = '0;
      case (state)
        S_MAX: if (lane_ok[l] && x > beat_max[q]) beat_max[q] = x;
        S_EXP: begin
          d   = smax[q] - x;
          idx = 32'(d) >> sh_q;
          if (idx > 32'd255) idx = 32'd255;
          lane_res[l] = lane_ok[l] ? {16'd0, exp_lut[idx[7:0]]} : 32'd0;
          beat_sum[q] = beat_sum[q] + lane_res[l];
        end
        S_LNS: if (lane_ok[l]) begin
          beat_lsum[q] = beat_lsum[q] + 48'(x);
          beat_lsq[q]  = beat_lsq[q] + 72'(64'(64'(x) * 64'(x)));
          beat_lcnt[q] = beat_lcnt[q] + 16'd1;
        end
        S_LNA: if (lane_ok[l]) begin
          // |x - mean| < 2^33, rstd <= 2^40: 76b product, normalized value
          // saturated to 40b before gamma (a 16b factor)
          dd = 34'(x) - 34'(ln_mean[q]);
          pn = (76'(dd) * $signed({1'b0, ln_rstd[q][40:0]})) >>> 24;
          if (pn > 76'sh7F_FFFF_FFFF)       nn = 40'sh7F_FFFF_FFFF;
          else if (pn < -76'sh80_0000_0000) nn = -40'sh80_0000_0000;
          else                              nn = pn[39:0];
          yy = (64'(nn) * 64'($signed(buf_b[p][31:16]))) >>> 12;
          yy = yy + (64'($signed(buf_b[p][15:0])) <<< 4);
          yy = yy >>> sh_q;
          if (yy > 64'sd2147483647)            lane_res[l] = 32'h7fff_ffff;
          else if (yy < -64'sd2147483647 - 1)  lane_res[l] = 32'h8000_0000;
          else                                 lane_res[l] = yy[31:0];
        end
        S_DIV: begin
          pr = 64'(buf_o[p]) * 64'(recip[q]);
          pr = pr >> 16;
          lane_res[l] = (pr > 64'd65535) ? 32'd65535 : 32'(pr);
        end
        S_OP: begin
          case (op_q)
            AFU_GELU: begin
              t = x >>> sh_q;
              if (t > 32'sd127)       lane_res[l] = buf_a[p];
              else if (t < -32'sd128) lane_res[l] = '0;
              else lane_res[l] = 32'($signed(gelu_lut[8'(t + 32'sd128)]));
            end
            AFU_RESIDUAL: begin
              rs = {buf_a[p][31], buf_a[p]} + {buf_b[p][31], buf_b[p]};
              if (rs[32] != rs[31]) lane_res[l] = rs[32] ? 32'h8000_0000 : 32'h7fff_ffff;
              else                  lane_res[l] = rs[31:0];
            end
            AFU_INT2BF: lane_res[l] = {16'd0, i2b_out[l]};
            AFU_BF2INT: lane_res[l] = bf_out[l];
            default:    lane_res[l] = buf_a[p];
          endcase
        end
        default: ;
      endcase
    end
  end

  // ---- buffers and LUTs -------------------------------------------------
  always_ff @(posedge clk) begin
    if (in_we) begin
      for (int l = 0; l < LANES; l++) begin
        if (in_hi) begin
          if (in_sel) buf_b[int'(in_beat) * LANES + l][31:16] <= in_wdata[l][15:0];
          else        buf_a[int'(in_beat) * LANES + l][31:16] <= in_wdata[l][15:0];
        end else begin
          if (in_sel) buf_b[int'(in_beat) * LANES + l] <= in_wdata[l];
          else        buf_a[int'(in_beat) * LANES + l] <= in_wdata[l];
        end
      end
    end
    if (lut_we) begin
      if (lut_sel) gelu_lut[lut_addr] <= lut_wdata;
      else         exp_lut[lut_addr]  <= lut_wdata;
    end
    if (state == S_EXP || state == S_DIV || state == S_OP || state == S_LNA)
      for (int l = 0; l < LANES; l++) buf_o[int'(beat) * LANES + l] <= lane_res[l];
  end

  always_comb
    for (int l = 0; l < LANES; l++) out_rdata[l] = buf_o[int'(out_beat) * LANES + l];

  // ---- control ----------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      beat  <= '0;
      op_q  <= AFU_SOFTMAX;
      nb_q  <= NB_1;
      len_q <= '0;
      sh_q  <= '0;
      sq_cnt <= '0;
      for (int q = 0; q < SEGS; q++) begin
        qmax[q]    <= 32'sh8000_0000;
        qsum[q]    <= '0;
        ln_sum[q]  <= '0;
        ln_sq[q]   <= '0;
        ln_cnt[q]  <= '0;
        ln_mean[q] <= '0;
        ln_rstd[q] <= '0;
        sq_rad[q]  <= '0;
        sq_rem[q]  <= '0;
        sq_root[q] <= '0;
      end
    end else begin
      case (state)
        S_IDLE: if (start) begin
          op_q  <= op;
          nb_q  <= nb;
          len_q <= seg_len;
          sh_q  <= in_shift;
          beat  <= '0;
          case (op)
            AFU_SOFTMAX:  state <= S_MAX;
            AFU_LN_STAT:  state <= S_LNS;
            AFU_LN_NORM:  state <= S_LNM;
            AFU_LN_APPLY: state <= S_LNA;
            default:      state <= S_OP;
          endcase
          for (int q = 0; q < SEGS; q++) begin
            qmax[q] <= 32'sh8000_0000;
            qsum[q] <= '0;
          end
        end
        S_LNM: begin
          // latch mean and radicand, clear the statistics
          for (int q = 0; q < SEGS; q++) begin
            ln_mean[q] <= c_mean[q];
            sq_rad[q]  <= c_rad[q];
            sq_rem[q]  <= '0;
            sq_root[q] <= '0;
            ln_sum[q]  <= '0;
            ln_sq[q]   <= '0;
            ln_cnt[q]  <= '0;
          end
          sq_cnt <= '0;
          state  <= S_SQRT;
        end
        S_SQRT: begin
          // restoring square root, two radicand bits per cycle
          for (int q = 0; q < SEGS; q++) begin
            logic [35:0] rm, tr;
            rm = {sq_rem[q][33:0], sq_rad[q][63:62]};
            tr = {2'd0, sq_root[q], 2'b01};
            sq_rad[q] <= sq_rad[q] << 2;
            if (rm >= tr) begin
              sq_rem[q]  <= rm - tr;
              sq_root[q] <= {sq_root[q][30:0], 1'b1};
            end else begin
              sq_rem[q]  <= rm;
              sq_root[q] <= {sq_root[q][30:0], 1'b0};
            end
          end
          sq_cnt <= sq_cnt + 1'b1;
          if (sq_cnt == 5'd31) state <= S_RCP;
        end
        S_RCP: begin
          for (int q = 0; q < SEGS; q++)
            ln_rstd[q] <= (sq_root[q] == 0) ? '0 : 48'((64'd1 << 48) / 64'(sq_root[q]));
          state <= S_LNA;
        end
        S_MAX, S_EXP, S_DIV, S_OP, S_LNS, S_LNA: begin
          for (int q = 0; q < SEGS; q++) begin
            if (state == S_MAX && beat_max[q] > qmax[q]) qmax[q] <= beat_max[q];
            if (state == S_EXP) qsum[q] <= qsum[q] + beat_sum[q];
            if (state == S_LNS) begin
              ln_sum[q] <= ln_sum[q] + beat_lsum[q];
              ln_sq[q]  <= ln_sq[q] + beat_lsq[q];
              ln_cnt[q] <= ln_cnt[q] + beat_lcnt[q];
            end
          end
          beat <= beat + 1'b1;
          if (beat == BTW'(BEATS - 1)) begin
            beat <= '0;
            case (state)
              S_MAX:   state <= S_EXP;
              S_EXP:   state <= S_DIV;
              default: state <= S_DONE;
            endcase
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);
  assign done = (state == S_DONE);
endmodule
