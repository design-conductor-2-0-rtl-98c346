// vtq_vec_norm: the NORM, RECIP, MUL element chain of the VerTQ compressors.
// It returns ||x||, 1/||x|| and the unit vector x/||x|| of a D-element FP32
// vector.
//
// The squares are accumulated one element per cycle with a single FP32
// multiply-add (D cycles), then one cycle takes the reciprocal square root of
// the sum (and the norm as sum * rsqrt), and a last cycle multiplies all D
// elements by the reciprocal in parallel.
// Interface: x is sampled with a one-cycle start pulse while the unit is idle;
// norm, inv_norm and u are valid from the cycle done is high (one-cycle pulse,
// D+2 clock edges after the edge that sampled start) until the next start.
// A zero vector gives norm 0 and a zero unit vector.
// The paper names this chain; the serial accumulation is this design's choice.
module vtq_vec_norm
  import vtq_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  input  vec32_t x,
  output logic   busy,
  output logic   done,
  output fp32_t  norm,
  output fp32_t  inv_norm,
  output vec32_t u
);

  typedef enum logic [1:0] {S_IDLE, S_ACC, S_ROOT, S_SCALE} state_e;
  state_e state;
  vec32_t xr;
  fp32_t  acc;
  logic [LOGD-1:0] i;

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      done     <= 1'b0;
      acc      <= FP_ZERO;
      i        <= '0;
      xr       <= '0;
      norm     <= FP_ZERO;
      inv_norm <= FP_ZERO;
      u        <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          xr    <= x;
          acc   <= FP_ZERO;
          i     <= '0;
          state <= S_ACC;
        end
        S_ACC: begin
          acc <= fp32_fma(xr[i], xr[i], acc);
          i   <= i + 1'b1;
          if (i == LOGD'(D - 1)) state <= S_ROOT;
        end
        S_ROOT: begin
          inv_norm <= fp32_rsqrt(acc);
          norm     <= fp32_mul(acc, fp32_rsqrt(acc));
          state    <= S_SCALE;
        end
        S_SCALE: begin
          for (int k = 0; k < D; k++) u[k] <= fp32_mul(xr[k], inv_norm);
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
