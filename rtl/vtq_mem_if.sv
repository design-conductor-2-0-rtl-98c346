// vtq_mem_if: one 256-bit memory interface port (MEM I/F) of VerTQ; the chip
// has NBANK = 9 of them side by side.
//
// Core side: a request stream (valid/ready, write enable, row address, 256-bit
// write data) and a response stream (valid, 256-bit read data) for reads.
// Memory side: the same request stream towards the memory device and its
// read-data return. Requests pass through a two-entry FIFO, so the core can
// issue back-to-back requests while the memory stalls; read data is
// registered once on the way back. Writes get no response. Requests are kept
// in order. Latency: one cycle more than the memory on each direction.
// The paper gives the port count and width; the protocol is this design's.
module vtq_mem_if
  import vtq_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // core side
  input  logic              req_valid,
  output logic              req_ready,
  input  logic              req_we,
  input  logic [AW-1:0]     req_addr,
  input  logic [BANK_W-1:0] req_wdata,
  output logic              rsp_valid,
  output logic [BANK_W-1:0] rsp_rdata,
  // memory side
  output logic              m_req_valid,
  input  logic              m_req_ready,
  output logic              m_req_we,
  output logic [AW-1:0]     m_req_addr,
  output logic [BANK_W-1:0] m_req_wdata,
  input  logic              m_rsp_valid,
  input  logic [BANK_W-1:0] m_rsp_rdata
);

  typedef struct packed {
    logic              we;
    logic [AW-1:0]     addr;
    logic [BANK_W-1:0] data;
  } req_t;

  req_t       fifo [2];
  logic       rd_ptr, wr_ptr;
  logic [1:0] count;
  logic       push, pop;

  assign req_ready   = (count != 2'd2);
  assign push        = req_valid && req_ready;
  assign m_req_valid = (count != 2'd0);
  assign pop         = m_req_valid && m_req_ready;
  assign m_req_we    = fifo[rd_ptr].we;
  assign m_req_addr  = fifo[rd_ptr].addr;
  assign m_req_wdata = fifo[rd_ptr].data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr    <= 1'b0;
      wr_ptr    <= 1'b0;
      count     <= 2'd0;
      fifo[0]   <= '0;
      fifo[1]   <= '0;
      rsp_valid <= 1'b0;
      rsp_rdata <= '0;
    end else begin
      if (push) begin
        fifo[wr_ptr] <= '{we: req_we, addr: req_addr, data: req_wdata};
        wr_ptr       <= ~wr_ptr;
      end
      if (pop) rd_ptr <= ~rd_ptr;
      count     <= count + {1'b0, push} - {1'b0, pop};
      rsp_valid <= m_rsp_valid;
      if (m_rsp_valid) rsp_rdata <= m_rsp_rdata;
    end
  end

  // a full FIFO never accepts a request
  assert property (@(posedge clk) disable iff (!rst_n) count <= 2'd2);

endmodule
