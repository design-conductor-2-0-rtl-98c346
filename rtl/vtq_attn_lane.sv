// vtq_attn_lane: one lane of the flash-attention engine. It consumes
// compressed (key, value) tokens one at a time and keeps a running online-
// softmax state (max m, sum l, value accumulator acc) for the current query,
// entirely in the compressed domain.
//
// KEY LANE. With the query pre-decoded to qr = RHT(q) and qs = S q, the
// TurboQuant-Prod estimate of the scaled score is
//   s = n_k / sqrt(D) * ( sum_c level[c] * bin[c] + g * sqrt(pi/2)/D * b )
//   bin[c] = sum of qr_i over the coordinates with idx_i = c
//   b      = sum_j (qjl_j ? -qs_j : qs_j)
// The D-coordinate scan only adds (one coordinate per cycle); the 8 codebook
// levels are then applied with 8 multiply-adds instead of D multiplies, which
// is where the 16x reduction of multiplies in the inner loop comes from.
// ONLINE SOFTMAX. m' = max(m, s), alpha = exp(m - m'), beta = exp(s - m'),
// l = alpha l + beta, using the negative-exponential element.
// VALUE LANE and ACCUMULATOR UPDATE. The value stays in the rotated domain:
// acc_i = alpha acc_i + (beta n_v) level[idx_v,i] for all D coordinates in one
// cycle. The inverse rotation is applied once per query, after the lanes are
// merged (vtq_attn_output).
// Interface: clear (while idle) starts a new query and empties the state;
// a token is taken when tok_valid and tok_ready are both high; tok_ready is
// high when the lane is idle. A token occupies the lane for D + 12 cycles.
// qr and qs must stay stable while tokens are processed. The lane structure
// follows the block diagram; the score algebra is TurboQuant's; the cycle
// schedule is this design's.
module vtq_attn_lane
  import vtq_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   clear,
  input  vec32_t qr,
  input  vec32_t qs,
  input  logic   tok_valid,
  output logic   tok_ready,
  input  ckv_t   tok,
  output logic   empty,
  output fp32_t  m,
  output fp32_t  l,
  output vec32_t acc,
  output fp32_t  score
);

  typedef enum logic [2:0] {S_IDLE, S_SCAN, S_DOT, S_SCORE, S_SMAX, S_ACC} state_e;
  state_e state;
  ckv_t   t;
  fp32_t  bin [NCENT];
  fp32_t  b, a, alpha, w;
  logic [LOGD-1:0]  i;
  logic [QBITS-1:0] j;
  fp32_t  lvl [NCENT];

  always_comb
    for (int c = 0; c < NCENT; c++) lvl[c] = centroid(QBITS'(c));

  assign tok_ready = (state == S_IDLE) && !clear;

  // online-softmax step, evaluated in S_SMAX
  fp32_t m_new, al, be;
  always_comb begin
    m_new = empty ? score : fp32_max(m, score);
    al    = empty ? FP_ZERO : fp32_exp_neg(fp32_sub(m_new, m));
    be    = fp32_exp_neg(fp32_sub(m_new, score));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      t     <= '0;
      for (int c = 0; c < NCENT; c++) bin[c] <= FP_ZERO;
      b     <= FP_ZERO;
      a     <= FP_ZERO;
      alpha <= FP_ZERO;
      w     <= FP_ZERO;
      i     <= '0;
      j     <= '0;
      empty <= 1'b1;
      m     <= FP_ZERO;
      l     <= FP_ZERO;
      acc   <= '0;
      score <= FP_ZERO;
    end else begin
      unique case (state)
        S_IDLE: begin
          if (clear) begin
            empty <= 1'b1;
            m     <= FP_ZERO;
            l     <= FP_ZERO;
            acc   <= '0;
          end else if (tok_valid) begin
            t <= tok;
            for (int c = 0; c < NCENT; c++) bin[c] <= FP_ZERO;
            b     <= FP_ZERO;
            i     <= '0;
            state <= S_SCAN;
          end
        end
        // key lane: add-only scan of the D coordinates
        S_SCAN: begin
          bin[t.k.idx[i]] <= fp32_add(bin[t.k.idx[i]], qr[i]);
          b <= fp32_add(b, t.k.qjl[i] ? fp32_neg(qs[i]) : qs[i]);
          i <= i + 1'b1;
          if (i == LOGD'(D - 1)) begin
            j     <= '0;
            a     <= FP_ZERO;
            state <= S_DOT;
          end
        end
        // key lane: 8 multiply-adds with the codebook levels
        S_DOT: begin
          a <= fp32_fma(lvl[j], bin[j], a);
          j <= j + 1'b1;
          if (j == QBITS'(NCENT - 1)) state <= S_SCORE;
        end
        S_SCORE: begin
          score <= fp32_mul(fp32_mul(fp16_to_fp32(t.k.norm), FP_INV_SQRT_D),
                            fp32_fma(fp32_mul(fp16_to_fp32(t.k.rnorm), FP_QJL_C), b, a));
          state <= S_SMAX;
        end
        // online softmax
        S_SMAX: begin
          m     <= m_new;
          l     <= fp32_fma(l, al, be);
          alpha <= al;
          w     <= fp32_mul(be, fp16_to_fp32(t.v.norm));
          empty <= 1'b0;
          state <= S_ACC;
        end
        // value lane + accumulator update, all coordinates at once
        S_ACC: begin
          for (int k = 0; k < D; k++)
            acc[k] <= fp32_fma(acc[k], alpha, fp32_mul(w, lvl[t.v.idx[k]]));
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
