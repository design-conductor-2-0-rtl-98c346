// vtq_flash_attn: the FLASH ATTENTION COMPUTATION ENGINE. It computes the
// attention output of one FP16 query over ntok compressed KV tokens without
// decompressing them: the query pre-decode maps q into the rotated and the
// Rademacher domains once, LANES attention lanes (8 in the paper's main
// configuration) each take whole tokens and keep partial online-softmax
// states, and the output unit merges the lanes and returns FP16 to the host.
//
// Tokens arrive on a valid/ready stream in any order of positions; each goes
// to the lowest-numbered idle lane, so the stream stalls (tok_ready low) when
// all lanes are busy. The split of the context across lanes and the merge of
// their states are this design's reading of the diagram's eight lanes feeding
// one output block.
// Interface: q and ntok are sampled with a start pulse while busy is low; the
// engine then accepts exactly ntok tokens; out is valid from the one-cycle done
// pulse until the next start. Throughput is LANES tokens per D + 12 cycles.
module vtq_flash_attn
  import vtq_pkg::*;
#(
  parameter int LANES = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  vec16_t      q,
  input  logic [15:0] ntok,
  input  logic        tok_valid,
  output logic        tok_ready,
  input  ckv_t        tok,
  output logic        busy,
  output logic        done,
  output vec16_t      out
);

  typedef enum logic [2:0] {S_IDLE, S_PRE, S_CLEAR, S_RUN, S_OUT} state_e;
  state_e state;
  logic [15:0] n, cnt;
  vec32_t qr, qs;
  logic pre_start, pre_done, pre_busy, clr, o_start, o_done, o_busy;

  logic   l_ready [LANES];
  logic   l_valid [LANES];
  logic   l_empty [LANES];
  fp32_t  l_m     [LANES];
  fp32_t  l_l     [LANES];
  vec32_t l_acc   [LANES];
  fp32_t  l_score [LANES];

  // lowest-numbered idle lane
  logic any_ready, all_idle;
  int   sel;
  always_comb begin
    any_ready = 1'b0;
    all_idle  = 1'b1;
    sel       = 0;
    for (int k = LANES - 1; k >= 0; k--)
      if (l_ready[k]) begin
        any_ready = 1'b1;
        sel       = k;
      end
    for (int k = 0; k < LANES; k++)
      if (!l_ready[k]) all_idle = 1'b0;
  end

  assign tok_ready = (state == S_RUN) && (cnt < n) && any_ready;
  assign busy      = (state != S_IDLE);
  assign pre_start = (state == S_IDLE) && start;
  assign clr       = (state == S_CLEAR);

  always_comb
    for (int k = 0; k < LANES; k++) l_valid[k] = tok_valid && tok_ready && (sel == k);

  vtq_query_predecode u_pre (
    .clk, .rst_n, .start(pre_start), .q(q), .busy(pre_busy), .done(pre_done),
    .qr(qr), .qs(qs));

  for (genvar g = 0; g < LANES; g++) begin : g_lane
    vtq_attn_lane u_lane (
      .clk, .rst_n, .clear(clr), .qr(qr), .qs(qs),
      .tok_valid(l_valid[g]), .tok_ready(l_ready[g]), .tok(tok),
      .empty(l_empty[g]), .m(l_m[g]), .l(l_l[g]), .acc(l_acc[g]),
      .score(l_score[g]));
  end

  vtq_attn_output #(.LANES(LANES)) u_out (
    .clk, .rst_n, .start(o_start), .empty(l_empty), .m(l_m), .l(l_l),
    .acc(l_acc), .busy(o_busy), .done(o_done), .out(out));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      n       <= '0;
      cnt     <= '0;
      o_start <= 1'b0;
      done    <= 1'b0;
    end else begin
      o_start <= 1'b0;
      done    <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          n     <= ntok;
          cnt   <= '0;
          state <= S_PRE;
        end
        S_PRE:   if (pre_done) state <= S_CLEAR;
        S_CLEAR: state <= S_RUN;
        S_RUN: begin
          if (tok_valid && tok_ready) cnt <= cnt + 1'b1;
          if (cnt == n && all_idle) begin
            o_start <= 1'b1;
            state   <= S_OUT;
          end
        end
        S_OUT: if (o_done) begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
