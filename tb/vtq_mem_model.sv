// vtq_mem_model: behavioural model of the memory devices behind VerTQ's
// NBANK 256-bit memory ports (not synthesizable design content). Each bank
// accepts one request per cycle unless it randomly stalls (STALL_PCT percent
// of cycles with ready low), and returns read data LAT cycles after accepting
// the read. DEPTH rows are modelled; the row address wraps. The testbench
// plays the host and loads and inspects rows directly through mem[][].
module vtq_mem_model
  import vtq_pkg::*;
#(
  parameter int DEPTH     = 512,
  parameter int LAT       = 3,
  parameter int STALL_PCT = 20
) (
  input  logic              clk,
  input  logic              req_valid [NBANK],
  output logic              req_ready [NBANK],
  input  logic              req_we    [NBANK],
  input  logic [AW-1:0]     req_addr  [NBANK],
  input  logic [BANK_W-1:0] req_wdata [NBANK],
  output logic              rsp_valid [NBANK],
  output logic [BANK_W-1:0] rsp_rdata [NBANK]
);

  logic [BANK_W-1:0] mem [NBANK][DEPTH];
  logic              pv [NBANK][LAT];
  logic [BANK_W-1:0] pd [NBANK][LAT];
  int stalls = 0;
  int reads = 0;
  int writes = 0;

  initial begin
    for (int b = 0; b < NBANK; b++) begin
      req_ready[b] = 1'b1;
      rsp_valid[b] = 1'b0;
      rsp_rdata[b] = '0;
      for (int k = 0; k < LAT; k++) begin pv[b][k] = 1'b0; pd[b][k] = '0; end
      for (int r = 0; r < DEPTH; r++) mem[b][r] = '0;
    end
  end

  always @(posedge clk) begin
    for (int b = 0; b < NBANK; b++) begin
      for (int k = LAT - 1; k > 0; k--) begin pv[b][k] <= pv[b][k-1]; pd[b][k] <= pd[b][k-1]; end
      pv[b][0] <= 1'b0;
      if (req_valid[b] && !req_ready[b]) stalls++;
      if (req_valid[b] && req_ready[b]) begin
        if (req_we[b]) begin
          mem[b][req_addr[b] % DEPTH] <= req_wdata[b];
          writes++;
        end else begin
          pv[b][0] <= 1'b1;
          pd[b][0] <= mem[b][req_addr[b] % DEPTH];
          reads++;
        end
      end
      req_ready[b] <= ($urandom % 100) >= STALL_PCT;
    end
  end

  always_comb
    for (int b = 0; b < NBANK; b++) begin
      rsp_valid[b] = pv[b][LAT-1];
      rsp_rdata[b] = pd[b][LAT-1];
    end

endmodule
