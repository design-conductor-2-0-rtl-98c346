// vtq_attn_output: ATTENTION OUTPUT TO HOST. It merges the partial online-
// softmax states of the LANES lanes, normalises, rotates the result back out
// of the Hadamard domain and converts it to FP16.
//   M   = max of m_j over the lanes that saw a token
//   f_j = exp(m_j - M)
//   L   = sum_j f_j l_j,   A = sum_j f_j acc_j      (one lane per cycle)
//   out = RHT^-1(A / L)  as FP16
// Interface: the lane states are sampled with a start pulse while idle; out is
// valid from the one-cycle done pulse (about LANES + LOGD + 5 cycles later)
// until the next start. With no token at all the output is zero.
// How the lanes are combined is not given in the paper; this is the standard
// merge of partial softmax states.
module vtq_attn_output
  import vtq_pkg::*;
#(
  parameter int LANES = 8
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  input  logic   empty [LANES],
  input  fp32_t  m     [LANES],
  input  fp32_t  l     [LANES],
  input  vec32_t acc   [LANES],
  output logic   busy,
  output logic   done,
  output vec16_t out
);

  localparam int LW = (LANES > 1) ? $clog2(LANES) : 1;

  typedef enum logic [1:0] {S_IDLE, S_MERGE, S_NORM, S_ROT} state_e;
  state_e state;
  fp32_t  mx, lsum, f;
  vec32_t a;
  logic [LW-1:0] j;
  logic   r_start, r_done, r_busy;
  vec32_t y;

  // maximum over the non-empty lanes
  fp32_t mmax;
  logic  any;
  always_comb begin
    mmax = FP_ZERO;
    any  = 1'b0;
    for (int k = 0; k < LANES; k++)
      if (!empty[k]) begin
        mmax = any ? fp32_max(mmax, m[k]) : m[k];
        any  = 1'b1;
      end
  end

  assign f    = fp32_exp_neg(fp32_sub(mx, m[j]));
  assign busy = (state != S_IDLE);

  vtq_rht u_rht (
    .clk, .rst_n, .start(r_start), .inverse(1'b1), .x(a), .busy(r_busy),
    .done(r_done), .y(y));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      done    <= 1'b0;
      mx      <= FP_ZERO;
      lsum    <= FP_ZERO;
      a       <= '0;
      j       <= '0;
      r_start <= 1'b0;
      out     <= '0;
    end else begin
      done    <= 1'b0;
      r_start <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          mx    <= mmax;
          lsum  <= FP_ZERO;
          a     <= '0;
          j     <= '0;
          state <= S_MERGE;
        end
        S_MERGE: begin
          if (!empty[j]) begin
            lsum <= fp32_fma(l[j], f, lsum);
            for (int k = 0; k < D; k++) a[k] <= fp32_fma(acc[j][k], f, a[k]);
          end
          j <= j + 1'b1;
          if (int'(j) == LANES - 1) state <= S_NORM;
        end
        S_NORM: begin
          for (int k = 0; k < D; k++) a[k] <= fp32_mul(a[k], fp32_recip(lsum));
          r_start <= 1'b1;
          state   <= S_ROT;
        end
        S_ROT: if (r_done) begin
          for (int k = 0; k < D; k++) out[k] <= fp32_to_fp16(y[k]);
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
