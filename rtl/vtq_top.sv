// vtq_top: VerTQ, a TurboQuant KV-cache compression and compressed-domain
// attention accelerator that sits between a host running the inference engine
// and the memory holding the KV cache.
//
// Blocks: the MAILBOX (host command registers), the ON-CHIP TRANSPORT (command
// sequencing and data movement), NBANK = 9 MEM I/F ports of 256 bits, the KEY
// COMPRESSOR ENGINE (TurboQuant-Prod, 3-bit MSE + 1-bit QJL), the VALUE
// COMPRESSOR ENGINE (TurboQuant-MSE, 3-bit) and the FLASH ATTENTION
// COMPUTATION ENGINE (query pre-decode, LANES = 8 lanes with online softmax,
// output merge). The randomized-Hadamard, Rademacher, codebook and FP element
// units are instantiated inside those engines.
// Host port: a 32-bit register bus (see vtq_mailbox) and an irq that is high
// when a command has completed. Memory ports: one request/response port per
// bank (see vtq_mem_if); the memory devices themselves are outside the chip.
// The host writes raw FP16 K/V/query rows into memory, issues COMPRESS to
// turn K/V rows into 944-bit compressed token rows (4.3x smaller than the two
// FP16 rows' 4096 bits of payload) and ATTEND to get the FP16 attention
// output of one query over the compressed cache, written back to memory.
module vtq_top
  import vtq_pkg::*;
#(
  parameter int LANES = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  // host (mailbox)
  input  logic              h_we,
  input  logic [2:0]        h_addr,
  input  logic [31:0]       h_wdata,
  output logic [31:0]       h_rdata,
  output logic              irq,
  // memory banks
  output logic              m_req_valid [NBANK],
  input  logic              m_req_ready [NBANK],
  output logic              m_req_we    [NBANK],
  output logic [AW-1:0]     m_req_addr  [NBANK],
  output logic [BANK_W-1:0] m_req_wdata [NBANK],
  input  logic              m_rsp_valid [NBANK],
  input  logic [BANK_W-1:0] m_rsp_rdata [NBANK]
);

  logic          cmd_valid, cmd_done;
  cmd_e          cmd;
  logic [AW-1:0] arg_a, arg_b, arg_dst;
  logic [15:0]   arg_count;

  logic              mreq_valid [NBANK];
  logic              mreq_ready [NBANK];
  logic              mreq_we;
  logic [AW-1:0]     mreq_addr;
  logic [BANK_W-1:0] mreq_wdata [NBANK];
  logic              mrsp_valid [NBANK];
  logic [BANK_W-1:0] mrsp_rdata [NBANK];

  logic   kc_start, kc_done, kc_busy, vc_start, vc_done, vc_busy;
  vec16_t kc_k, vc_v;
  ckey_t  kc_ck;
  cval_t  vc_cv;

  logic        fa_start, fa_done, fa_busy, fa_tok_valid, fa_tok_ready;
  vec16_t      fa_q, fa_out;
  logic [15:0] fa_ntok;
  ckv_t        fa_tok;

  vtq_mailbox u_mailbox (
    .clk, .rst_n, .h_we, .h_addr, .h_wdata, .h_rdata, .irq,
    .cmd_valid, .cmd, .arg_a, .arg_b, .arg_dst, .arg_count, .cmd_done);

  vtq_transport u_transport (
    .clk, .rst_n, .cmd_valid, .cmd, .arg_a, .arg_b, .arg_dst, .arg_count, .cmd_done,
    .mreq_valid, .mreq_ready, .mreq_we, .mreq_addr, .mreq_wdata, .mrsp_valid, .mrsp_rdata,
    .kc_start, .kc_k, .kc_done, .kc_ck, .vc_start, .vc_v, .vc_done, .vc_cv,
    .fa_start, .fa_q, .fa_ntok, .fa_tok_valid, .fa_tok_ready, .fa_tok, .fa_done, .fa_out);

  for (genvar g = 0; g < NBANK; g++) begin : g_bank
    vtq_mem_if u_mem_if (
      .clk, .rst_n,
      .req_valid(mreq_valid[g]), .req_ready(mreq_ready[g]), .req_we(mreq_we),
      .req_addr(mreq_addr), .req_wdata(mreq_wdata[g]),
      .rsp_valid(mrsp_valid[g]), .rsp_rdata(mrsp_rdata[g]),
      .m_req_valid(m_req_valid[g]), .m_req_ready(m_req_ready[g]), .m_req_we(m_req_we[g]),
      .m_req_addr(m_req_addr[g]), .m_req_wdata(m_req_wdata[g]),
      .m_rsp_valid(m_rsp_valid[g]), .m_rsp_rdata(m_rsp_rdata[g]));
  end

  vtq_key_compressor u_key (
    .clk, .rst_n, .start(kc_start), .k(kc_k), .busy(kc_busy), .done(kc_done), .ck(kc_ck));

  vtq_value_compressor u_value (
    .clk, .rst_n, .start(vc_start), .v(vc_v), .busy(vc_busy), .done(vc_done), .cv(vc_cv));

  vtq_flash_attn #(.LANES(LANES)) u_flash (
    .clk, .rst_n, .start(fa_start), .q(fa_q), .ntok(fa_ntok),
    .tok_valid(fa_tok_valid), .tok_ready(fa_tok_ready), .tok(fa_tok),
    .busy(fa_busy), .done(fa_done), .out(fa_out));

endmodule
