// vtq_codebook_bank: the CODEBOOK BANK of the VerTQ compressors. It maps each
// of the D coordinates of a rotated unit vector to the 3-bit index of the
// nearest level of the Lloyd-Max codebook for N(0, 1/D).
//
// All D coordinates are compared in parallel against the 7 decision thresholds
// (midpoints of the levels); the index is the number of thresholds at or below
// the value, so index 0 is the most negative level and 7 the most positive.
// Interface: y is sampled when in_valid is high; idx is registered and valid
// with out_valid one cycle later. 3 bits follow the paper; the Lloyd-Max
// levels come from the TurboQuant algorithm.
module vtq_codebook_bank
  import vtq_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  input  vec32_t  y,
  output logic    out_valid,
  output idxvec_t idx
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      idx       <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid)
        for (int k = 0; k < D; k++) idx[k] <= quantize(y[k]);
    end
  end

endmodule
