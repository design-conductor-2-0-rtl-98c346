// vtq_mailbox: the host-visible MAILBOX of VerTQ. The host (the inference
// engine) writes a command and its arguments into registers, and polls a
// status register; the data itself moves through the shared memory.
//
// Registers (32-bit, word index on h_addr):
//   0 CMD      write 1 = COMPRESS, 2 = ATTEND; the write starts the command
//   1 SRC_A    COMPRESS: first raw K row     ATTEND: query row
//   2 SRC_B    COMPRESS: first raw V row     ATTEND: first compressed row
//   3 DST      COMPRESS: first compressed row ATTEND: output row
//   4 COUNT    number of tokens
//   5 STATUS   bit 0 busy, bit 1 done (sticky, any write clears it),
//              bits 31:16 number of completed commands
// A command written while busy is ignored. Reads are combinational.
// cmd_valid is a one-cycle pulse carrying the command and its arguments to the
// transport; cmd_done from the transport ends it and raises irq (= done bit).
// The register map and protocol are this design's: the paper only says that
// the host writes data and results to a dedicated part of memory and starts
// and stops operations.
module vtq_mailbox
  import vtq_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          h_we,
  input  logic [2:0]    h_addr,
  input  logic [31:0]   h_wdata,
  output logic [31:0]   h_rdata,
  output logic          irq,
  output logic          cmd_valid,
  output cmd_e          cmd,
  output logic [AW-1:0] arg_a,
  output logic [AW-1:0] arg_b,
  output logic [AW-1:0] arg_dst,
  output logic [15:0]   arg_count,
  input  logic          cmd_done
);

  logic        busy, done_flag;
  logic [15:0] ncomplete;
  logic [31:0] r_a, r_b, r_dst, r_count;
  logic [7:0]  r_cmd;

  assign irq       = done_flag;
  assign arg_a     = r_a[AW-1:0];
  assign arg_b     = r_b[AW-1:0];
  assign arg_dst   = r_dst[AW-1:0];
  assign arg_count = r_count[15:0];

  always_comb begin
    unique case (h_addr)
      3'd0:    h_rdata = {24'd0, r_cmd};
      3'd1:    h_rdata = r_a;
      3'd2:    h_rdata = r_b;
      3'd3:    h_rdata = r_dst;
      3'd4:    h_rdata = r_count;
      3'd5:    h_rdata = {ncomplete, 14'd0, done_flag, busy};
      default: h_rdata = 32'd0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      done_flag <= 1'b0;
      ncomplete <= '0;
      r_a       <= '0;
      r_b       <= '0;
      r_dst     <= '0;
      r_count   <= '0;
      r_cmd     <= '0;
      cmd_valid <= 1'b0;
      cmd       <= CMD_NONE;
    end else begin
      cmd_valid <= 1'b0;
      if (h_we) begin
        unique case (h_addr)
          3'd0: if (!busy && (h_wdata[7:0] == CMD_COMPRESS || h_wdata[7:0] == CMD_ATTEND)) begin
            r_cmd     <= h_wdata[7:0];
            cmd       <= cmd_e'(h_wdata[7:0]);
            cmd_valid <= 1'b1;
            busy      <= 1'b1;
            done_flag <= 1'b0;
          end
          3'd1: r_a     <= h_wdata;
          3'd2: r_b     <= h_wdata;
          3'd3: r_dst   <= h_wdata;
          3'd4: r_count <= h_wdata;
          3'd5: done_flag <= 1'b0;
          default: ;
        endcase
      end
      if (cmd_done) begin
        busy      <= 1'b0;
        done_flag <= 1'b1;
        ncomplete <= ncomplete + 1'b1;
      end
    end
  end

endmodule
