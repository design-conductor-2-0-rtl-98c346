// vtq_transport: the ON-CHIP TRANSPORT of VerTQ. It carries out the host's
// commands by moving rows between the memory banks and the engines.
//
// Memory is seen as rows of NBANK x 256 bits, all banks addressed together.
// Row layouts: a raw FP16 vector (K, V, query or attention output) fills
// banks 0-7, element i in bits 16i+15:16i; a compressed token (ckv_t:
// compressed key then compressed value, 944 bits) fills banks 0-3 from bit 0
// up. Bank 8 is not used by these layouts.
//   COMPRESS: for t < COUNT, read K row SRC_A+t and V row SRC_B+t, run the key
//             and value compressors in parallel, write the token to row DST+t.
//   ATTEND:   read the query row SRC_A, start the flash-attention engine, feed
//             it the compressed rows SRC_B .. SRC_B+COUNT-1 (stalling while
//             all lanes are busy), then write the FP16 result to row DST.
// A memory operation issues one request to every bank it touches (each bank
// may stall on its own) and, for a read, waits for all their responses.
// Writes are posted. The paper names the transport; the row layout, command
// set and sequencing are this design's.
module vtq_transport
  import vtq_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // command from the mailbox
  input  logic              cmd_valid,
  input  cmd_e              cmd,
  input  logic [AW-1:0]     arg_a,
  input  logic [AW-1:0]     arg_b,
  input  logic [AW-1:0]     arg_dst,
  input  logic [15:0]       arg_count,
  output logic              cmd_done,
  // memory interfaces (core side)
  output logic              mreq_valid [NBANK],
  input  logic              mreq_ready [NBANK],
  output logic              mreq_we,
  output logic [AW-1:0]     mreq_addr,
  output logic [BANK_W-1:0] mreq_wdata [NBANK],
  input  logic              mrsp_valid [NBANK],
  input  logic [BANK_W-1:0] mrsp_rdata [NBANK],
  // key and value compressors
  output logic              kc_start,
  output vec16_t            kc_k,
  input  logic              kc_done,
  input  ckey_t             kc_ck,
  output logic              vc_start,
  output vec16_t            vc_v,
  input  logic              vc_done,
  input  cval_t             vc_cv,
  // flash-attention engine
  output logic              fa_start,
  output vec16_t            fa_q,
  output logic [15:0]       fa_ntok,
  output logic              fa_tok_valid,
  input  logic              fa_tok_ready,
  output ckv_t              fa_tok,
  input  logic              fa_done,
  input  vec16_t            fa_out
);

  localparam logic [NBANK-1:0] MASK_VEC = NBANK'(9'h0ff);  // banks 0-7
  localparam logic [NBANK-1:0] MASK_CKV = NBANK'(9'h00f);  // banks 0-3

  typedef enum logic [3:0] {
    T_IDLE, C_RDK, C_RDV, C_COMP, C_WR, A_RDQ, A_RDT, A_FEED, A_WAIT, A_WR, T_DONE
  } state_e;
  state_e state;

  cmd_e          c;
  logic [AW-1:0] a, b, dst;
  logic [15:0]   count, t;
  logic          launched, kd, vd;

  logic [NBANK-1:0]  pend_req, pend_rsp;
  logic [AW-1:0]     mop_addr;
  logic              mop_we;
  logic [BANK_W-1:0] rbuf [NBANK];
  logic [BANK_W-1:0] wbuf [NBANK];
  logic              mop_idle;

  vec16_t kbuf, vbuf, qbuf;
  ckv_t   tokbuf, cbuf;
  vec16_t obuf;
  logic [NBANK*BANK_W-1:0] rrow, wrow;

  // row to write: a compressed token (COMPRESS) or the FP16 output (ATTEND)
  always_comb begin
    wrow = '0;
    if (state == C_WR) wrow[CKV_W-1:0] = cbuf;
    else wrow[$bits(vec16_t)-1:0] = obuf;
  end

  assign mop_idle = (pend_req == '0) && (pend_rsp == '0);
  assign mreq_we   = mop_we;
  assign mreq_addr = mop_addr;
  always_comb
    for (int k = 0; k < NBANK; k++) begin
      mreq_valid[k] = pend_req[k];
      mreq_wdata[k] = wbuf[k];
      rrow[k*BANK_W +: BANK_W] = rbuf[k];
    end

  assign kc_k         = kbuf;
  assign vc_v         = vbuf;
  assign fa_q         = qbuf;
  assign fa_ntok      = count;
  assign fa_tok       = tokbuf;
  assign fa_tok_valid = (state == A_FEED);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= T_IDLE;
      c        <= CMD_NONE;
      a        <= '0;
      b        <= '0;
      dst      <= '0;
      count    <= '0;
      t        <= '0;
      launched <= 1'b0;
      kd       <= 1'b0;
      vd       <= 1'b0;
      pend_req <= '0;
      pend_rsp <= '0;
      mop_addr <= '0;
      mop_we   <= 1'b0;
      for (int k = 0; k < NBANK; k++) begin rbuf[k] <= '0; wbuf[k] <= '0; end
      kbuf     <= '0;
      vbuf     <= '0;
      qbuf     <= '0;
      obuf     <= '0;
      tokbuf   <= '0;
      cbuf     <= '0;
      kc_start <= 1'b0;
      vc_start <= 1'b0;
      fa_start <= 1'b0;
      cmd_done <= 1'b0;
    end else begin
      kc_start <= 1'b0;
      vc_start <= 1'b0;
      fa_start <= 1'b0;
      cmd_done <= 1'b0;
      // progress of the current memory operation, bank by bank
      for (int k = 0; k < NBANK; k++) begin
        if (pend_req[k] && mreq_ready[k]) pend_req[k] <= 1'b0;
        if (mrsp_valid[k]) begin
          rbuf[k]     <= mrsp_rdata[k];
          pend_rsp[k] <= 1'b0;
        end
      end
      unique case (state)
        T_IDLE: if (cmd_valid) begin
          c        <= cmd;
          a        <= arg_a;
          b        <= arg_b;
          dst      <= arg_dst;
          count    <= arg_count;
          t        <= '0;
          launched <= 1'b0;
          if (cmd == CMD_COMPRESS) state <= (arg_count == 16'd0) ? T_DONE : C_RDK;
          else if (cmd == CMD_ATTEND) state <= A_RDQ;
        end
        C_RDK, C_RDV, A_RDQ, A_RDT: begin
          if (!launched) begin
            launched <= 1'b1;
            mop_we   <= 1'b0;
            mop_addr <= (state == C_RDK) ? a + AW'(t) :
                        (state == C_RDV) ? b + AW'(t) :
                        (state == A_RDQ) ? a : b + AW'(t);
            pend_req <= (state == A_RDT) ? MASK_CKV : MASK_VEC;
            pend_rsp <= (state == A_RDT) ? MASK_CKV : MASK_VEC;
          end else if (mop_idle) begin
            launched <= 1'b0;
            unique case (state)
              C_RDK: begin kbuf <= rrow[$bits(vec16_t)-1:0]; state <= C_RDV; end
              C_RDV: begin
                vbuf     <= rrow[$bits(vec16_t)-1:0];
                kc_start <= 1'b1;
                vc_start <= 1'b1;
                kd       <= 1'b0;
                vd       <= 1'b0;
                state    <= C_COMP;
              end
              A_RDQ: begin
                qbuf     <= rrow[$bits(vec16_t)-1:0];
                fa_start <= 1'b1;
                state    <= (count == 16'd0) ? A_WAIT : A_RDT;
              end
              default: begin tokbuf <= rrow[CKV_W-1:0]; state <= A_FEED; end
            endcase
          end
        end
        C_COMP: begin
          if (kc_done) begin cbuf.k <= kc_ck; kd <= 1'b1; end
          if (vc_done) begin cbuf.v <= vc_cv; vd <= 1'b1; end
          if ((kd || kc_done) && (vd || vc_done)) state <= C_WR;
        end
        C_WR, A_WR: begin
          if (!launched) begin
            launched <= 1'b1;
            mop_we   <= 1'b1;
            mop_addr <= (state == C_WR) ? dst + AW'(t) : dst;
            pend_req <= (state == C_WR) ? MASK_CKV : MASK_VEC;
            for (int k = 0; k < NBANK; k++) wbuf[k] <= wrow[k*BANK_W +: BANK_W];
          end else if (mop_idle) begin
            launched <= 1'b0;
            if (state == A_WR || t + 16'd1 == count) state <= T_DONE;
            else begin
              t     <= t + 16'd1;
              state <= C_RDK;
            end
          end
        end
        A_FEED: if (fa_tok_ready) begin
          if (t + 16'd1 == count) state <= A_WAIT;
          else begin
            t     <= t + 16'd1;
            state <= A_RDT;
          end
        end
        A_WAIT: if (fa_done) begin
          obuf  <= fa_out;
          state <= A_WR;
        end
        T_DONE: begin
          cmd_done <= 1'b1;
          state    <= T_IDLE;
        end
        default: state <= T_IDLE;
      endcase
    end
  end

endmodule
