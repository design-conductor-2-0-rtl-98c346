// vtq_rht: randomized Hadamard transform of a D-element FP32 vector, the random
// rotation of TurboQuant.
//
// Forward:  y = (1/sqrt(D)) * H * diag(s) * x
// Inverse:  y = diag(s) * (1/sqrt(D)) * H * x
// H is the D x D Walsh-Hadamard matrix and s the fixed random sign vector
// vtq_pkg::rht_signs(); the two directions are exact inverses, so the rotation
// is orthonormal. The fast transform runs one butterfly stage per cycle over
// all D/2 pairs (D FP32 add/subtract elements), LOGD stages, then one cycle
// multiplies by 1/sqrt(D) and applies the output signs.
// Interface: x and inverse are sampled with a start pulse while idle; y is
// valid from the one-cycle done pulse, LOGD+1 clock edges after the edge that
// sampled start, until the next start.
// The paper names the block; the stage-per-cycle schedule is this design's.
module vtq_rht
  import vtq_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  input  logic   inverse,
  input  vec32_t x,
  output logic   busy,
  output logic   done,
  output vec32_t y
);

  localparam logic [D-1:0] SG = rht_signs();

  typedef enum logic [1:0] {S_IDLE, S_BFLY, S_SCALE} state_e;
  state_e state;
  vec32_t v;
  logic   inv_r;
  logic [$clog2(LOGD)-1:0] stage;

  function automatic vec32_t bfly(vec32_t a, int h);
    vec32_t b;
    b = a;
    for (int k = 0; k < D; k++) begin
      if ((k & h) == 0) begin
        b[k]     = fp32_add(a[k], a[k + h]);
        b[k + h] = fp32_sub(a[k], a[k + h]);
      end
    end
    return b;
  endfunction

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      done  <= 1'b0;
      v     <= '0;
      y     <= '0;
      inv_r <= 1'b0;
      stage <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          for (int k = 0; k < D; k++)
            v[k] <= (!inverse && SG[k]) ? fp32_neg(x[k]) : x[k];
          inv_r <= inverse;
          stage <= '0;
          state <= S_BFLY;
        end
        S_BFLY: begin
          for (int s = 0; s < LOGD; s++)
            if (int'(stage) == s) v <= bfly(v, 1 << s);
          stage <= stage + 1'b1;
          if (int'(stage) == LOGD - 1) state <= S_SCALE;
        end
        S_SCALE: begin
          for (int k = 0; k < D; k++)
            y[k] <= (inv_r && SG[k]) ? fp32_neg(fp32_mul(v[k], FP_INV_SQRT_D))
                                     : fp32_mul(v[k], FP_INV_SQRT_D);
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
