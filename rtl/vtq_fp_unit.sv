// vtq_fp_unit: the custom FP16/FP32 element library of VerTQ as one
// selectable unit (multiply, add/subtract, multiply-add, reciprocal,
// reciprocal square root, square root, negative exponential, max and the
// FP16/FP32 conversions).
//
// The element functions live in vtq_pkg and are instantiated inline by the
// engines wherever they need them; this unit wraps them behind one registered
// port so each element can be exercised on its own. The operation, the
// operands and in_valid are sampled on a rising clock edge and the result
// appears with out_valid one cycle later (latency 1, one operation per cycle).
// FP16 operands and results use the low 16 bits of a, b and y.
// The list of elements follows the chip's block diagram; their algorithms
// (Newton steps, Horner evaluation, DAZ/FTZ with round-to-nearest-even) are
// described in vtq_pkg.
module vtq_fp_unit
  import vtq_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  fpop_e op,
  input  fp32_t a,
  input  fp32_t b,
  input  fp32_t c,
  output logic  out_valid,
  output fp32_t y
);

  fp32_t r;

  always_comb begin
    unique case (op)
      OP_ADD:     r = fp32_add(a, b);
      OP_SUB:     r = fp32_sub(a, b);
      OP_MUL:     r = fp32_mul(a, b);
      OP_FMA:     r = fp32_fma(a, b, c);
      OP_RECIP:   r = fp32_recip(a);
      OP_RSQRT:   r = fp32_rsqrt(a);
      OP_SQRT:    r = fp32_sqrt(a);
      OP_EXPNEG:  r = fp32_exp_neg(a);
      OP_F16TO32: r = fp16_to_fp32(a[15:0]);
      OP_F32TO16: r = {16'd0, fp32_to_fp16(a)};
      OP_MAX:     r = fp32_max(a, b);
      default:    r = FP_ZERO;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      y         <= FP_ZERO;
    end else begin
      out_valid <= in_valid;
      if (in_valid) y <= r;
    end
  end

endmodule
