// vtq_rademacher: multiplies a D-element FP32 vector by the fixed D x D random
// +-1 (Rademacher) matrix S, the Johnson-Lindenstrauss projection of QJL.
//
// z = S * r. Column i of S is vtq_pkg::rad_column(i) (bit j set means
// S[j][i] = -1); a column is generated on the fly each cycle instead of being
// stored. Each cycle adds +-r[i] into all D accumulators (D FP32 adders), so
// the product takes D cycles and needs no multiplier.
// Interface: r is sampled with a start pulse while idle; z is valid from the
// one-cycle done pulse, D clock edges after the edge that sampled start, until
// the next start. Both the key compressor (sign(S r)) and the query
// pre-decode (S q) use this unit, so both see the same matrix.
// The paper names the block; its schedule and matrix generator are this
// design's choices.
module vtq_rademacher
  import vtq_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  input  vec32_t r,
  output logic   busy,
  output logic   done,
  output vec32_t z
);

  vec32_t rr;
  logic   run;
  logic [LOGD-1:0] col;
  logic [D-1:0] sc;

  assign busy = run;
  assign sc   = rad_column(32'(col));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run  <= 1'b0;
      done <= 1'b0;
      col  <= '0;
      rr   <= '0;
      z    <= '0;
    end else begin
      done <= 1'b0;
      if (!run) begin
        if (start) begin
          rr  <= r;
          z   <= '0;
          col <= '0;
          run <= 1'b1;
        end
      end else begin
        for (int j = 0; j < D; j++)
          z[j] <= fp32_add(z[j], sc[j] ? fp32_neg(rr[col]) : rr[col]);
        col <= col + 1'b1;
        if (col == LOGD'(D - 1)) begin
          run  <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

endmodule
