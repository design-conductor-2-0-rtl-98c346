// vtq_value_compressor: the VALUE COMPRESSOR ENGINE. It compresses one FP16
// value vector with TurboQuant-MSE: normalise, rotate with the randomized
// Hadamard transform, and quantise every rotated coordinate to a 3-bit index
// of the Lloyd-Max codebook. The stored value is {idx (3 bits x D), ||v|| as
// FP16}: 3.125 bits per element for D = 128.
// The steps (NORM, RECIP, MUL -> RAND. HADAMARD -> CODEBOOK BANK) follow the
// chip's block diagram; each is started by the done pulse of the one before.
// Interface: v is sampled with a start pulse while busy is low; cv is valid
// from the one-cycle done pulse until the next start. Latency is about
// D + LOGD + 5 cycles.
module vtq_value_compressor
  import vtq_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  input  vec16_t v,
  output logic   busy,
  output logic   done,
  output cval_t  cv
);

  vec32_t vx, u, yrot;
  idxvec_t idx;
  fp32_t  nrm, inv;
  logic   n_done, r_done, cb_valid, n_busy, r_busy, go;

  assign go = start && !busy;

  always_comb
    for (int i = 0; i < D; i++) vx[i] = fp16_to_fp32(v[i]);

  vtq_vec_norm u_norm (
    .clk, .rst_n, .start(go), .x(vx), .busy(n_busy), .done(n_done),
    .norm(nrm), .inv_norm(inv), .u(u));

  vtq_rht u_rht (
    .clk, .rst_n, .start(n_done), .inverse(1'b0), .x(u), .busy(r_busy),
    .done(r_done), .y(yrot));

  vtq_codebook_bank u_codebook (
    .clk, .rst_n, .in_valid(r_done), .y(yrot), .out_valid(cb_valid), .idx(idx));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      cv   <= '0;
    end else begin
      done <= 1'b0;
      if (go) busy <= 1'b1;
      if (n_done) cv.norm <= fp32_to_fp16(nrm);
      if (cb_valid) begin
        cv.idx <= idx;
        busy   <= 1'b0;
        done   <= 1'b1;
      end
    end
  end

endmodule
