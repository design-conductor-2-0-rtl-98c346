// vtq_key_compressor: the KEY COMPRESSOR ENGINE. It compresses one FP16 key
// vector with TurboQuant-Prod: a 3-bit MSE quantisation of the randomly
// rotated unit key plus a 1-bit QJL sketch of what that quantisation missed.
//
//   n   = ||k||,            u  = k / n                     (NORM, RECIP, MUL)
//   y   = RHT(u)                                           (RAND. HADAMARD)
//   idx = nearest codebook level of each y_i               (CODEBOOK BANK)
//   u^  = RHT^-1(level[idx])                  (DE-QUANT BANK, RAND. HADAMARD)
//   r   = u - u^,           g  = ||r||                     (RESIDUALS, NORMALIZE)
//   qjl = sign(S r)                     (RADEMACHER, QUANT. J-L XFORM)
//
// The stored key is {idx (3 bits x D), qjl (1 bit x D), n, g as FP16}: 4.25
// bits per element for D = 128. The steps run one after the other, each
// started by the done pulse of the one before; the residual norm and the
// Rademacher product run in parallel. The order of the steps follows the
// chip's block diagram; the sequencing and handshake are this design's.
// Interface: k is sampled with a start pulse while busy is low; ck is valid
// from the one-cycle done pulse until the next start. Latency is about
// 2D + 2 LOGD + 10 cycles.
module vtq_key_compressor
  import vtq_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  input  vec16_t k,
  output logic   busy,
  output logic   done,
  output ckey_t  ck
);

  vec32_t kx, u, yrot, yhat, uhat, z, res, ures;
  idxvec_t idx;
  fp32_t  n0_norm, n0_inv, n1_norm, n1_inv;
  logic   n0_done, rf_done, cb_valid, dq_valid, ri_done, n1_done, rad_done;
  logic   n0_busy, rf_busy, ri_busy, n1_busy, rad_busy;
  logic   go, res_valid, n1_seen, rad_seen;

  assign go = start && !busy;

  always_comb
    for (int i = 0; i < D; i++) kx[i] = fp16_to_fp32(k[i]);

  vtq_vec_norm u_norm (
    .clk, .rst_n, .start(go), .x(kx), .busy(n0_busy), .done(n0_done),
    .norm(n0_norm), .inv_norm(n0_inv), .u(u));

  vtq_rht u_rht_fwd (
    .clk, .rst_n, .start(n0_done), .inverse(1'b0), .x(u), .busy(rf_busy),
    .done(rf_done), .y(yrot));

  vtq_codebook_bank u_codebook (
    .clk, .rst_n, .in_valid(rf_done), .y(yrot), .out_valid(cb_valid), .idx(idx));

  vtq_dequant_bank u_dequant (
    .clk, .rst_n, .in_valid(cb_valid), .idx(idx), .out_valid(dq_valid), .y(yhat));

  vtq_rht u_rht_inv (
    .clk, .rst_n, .start(dq_valid), .inverse(1'b1), .x(yhat), .busy(ri_busy),
    .done(ri_done), .y(uhat));

  vtq_vec_norm u_normalize (
    .clk, .rst_n, .start(res_valid), .x(res), .busy(n1_busy), .done(n1_done),
    .norm(n1_norm), .inv_norm(n1_inv), .u(ures));

  vtq_rademacher u_rademacher (
    .clk, .rst_n, .start(res_valid), .r(res), .busy(rad_busy), .done(rad_done), .z(z));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      done      <= 1'b0;
      res       <= '0;
      res_valid <= 1'b0;
      n1_seen   <= 1'b0;
      rad_seen  <= 1'b0;
      ck        <= '0;
    end else begin
      done      <= 1'b0;
      res_valid <= 1'b0;
      if (go) begin
        busy     <= 1'b1;
        n1_seen  <= 1'b0;
        rad_seen <= 1'b0;
      end
      if (n0_done) ck.norm <= fp32_to_fp16(n0_norm);
      if (cb_valid) ck.idx <= idx;
      if (ri_done) begin
        for (int i = 0; i < D; i++) res[i] <= fp32_sub(u[i], uhat[i]);
        res_valid <= 1'b1;
      end
      if (n1_done) begin
        ck.rnorm <= fp32_to_fp16(n1_norm);
        n1_seen  <= 1'b1;
      end
      if (rad_done) begin
        for (int j = 0; j < D; j++) ck.qjl[j] <= z[j][31] && !fp32_is_zero(z[j]);
        rad_seen <= 1'b1;
      end
      if (busy && (n1_seen || n1_done) && (rad_seen || rad_done) && !done) begin
        busy <= 1'b0;
        done <= 1'b1;
      end
    end
  end

endmodule
