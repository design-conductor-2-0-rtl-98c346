// vtq_dequant_bank: the DE-QUANT BANK of the key compressor. It maps D 3-bit
// codebook indices back to their FP32 levels (N(0,1) Lloyd-Max levels scaled
// by 1/sqrt(D)), in parallel.
// Interface: idx is sampled when in_valid is high; y is registered and valid
// with out_valid one cycle later.
module vtq_dequant_bank
  import vtq_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  input  idxvec_t idx,
  output logic    out_valid,
  output vec32_t  y
);

  fp32_t lvl [NCENT];

  always_comb
    for (int c = 0; c < NCENT; c++) lvl[c] = centroid(QBITS'(c));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      y         <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid)
        for (int k = 0; k < D; k++) y[k] <= lvl[idx[k]];
    end
  end

endmodule
