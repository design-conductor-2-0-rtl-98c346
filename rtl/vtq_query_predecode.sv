// vtq_query_predecode: the QUERY PRE-DECODE of the flash-attention engine.
// Once per decode step it maps the FP16 query into the two domains the
// compressed keys live in, so that no key ever has to be decompressed:
//   qr = RHT(q)   (rotated domain: <q, k_mse> = n_k * sum_i qr_i level[idx_i])
//   qs = S q      (Rademacher domain: <q, r> ~ sqrt(pi/2)/D * g * sum_j qs_j sign_j)
// The two transforms run in parallel on their own units.
// Interface: q is sampled with a start pulse while busy is low; qr and qs are
// valid from the one-cycle done pulse (D+1 cycles later) until the next start.
module vtq_query_predecode
  import vtq_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  input  vec16_t q,
  output logic   busy,
  output logic   done,
  output vec32_t qr,
  output vec32_t qs
);

  vec32_t qx;
  logic go, r_done, s_done, r_busy, s_busy, r_seen, s_seen;

  assign go = start && !busy;

  always_comb
    for (int i = 0; i < D; i++) qx[i] = fp16_to_fp32(q[i]);

  vtq_rht u_rht (
    .clk, .rst_n, .start(go), .inverse(1'b0), .x(qx), .busy(r_busy),
    .done(r_done), .y(qr));

  vtq_rademacher u_rademacher (
    .clk, .rst_n, .start(go), .r(qx), .busy(s_busy), .done(s_done), .z(qs));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      done   <= 1'b0;
      r_seen <= 1'b0;
      s_seen <= 1'b0;
    end else begin
      done <= 1'b0;
      if (go) begin
        busy   <= 1'b1;
        r_seen <= 1'b0;
        s_seen <= 1'b0;
      end
      if (r_done) r_seen <= 1'b1;
      if (s_done) s_seen <= 1'b1;
      if (busy && (r_seen || r_done) && (s_seen || s_done) && !done) begin
        busy <= 1'b0;
        done <= 1'b1;
      end
    end
  end

endmodule
