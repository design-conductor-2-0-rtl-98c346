// tb_vtq_mem_if: a random mix of reads and writes through one memory port to
// a behavioural memory that stalls at random. Every read must return the last
// value written to its row (checked in order against a scoreboard), requests
// must be accepted back to back while the FIFO has room, and the FIFO must
// fill and push back at least once.
module tb_vtq_mem_if;
  import vtq_pkg::*;
  import vtq_tb_pkg::*;

  logic clk = 0, rst_n = 0;
  logic req_valid = 0, req_ready, req_we = 0, rsp_valid;
  logic [AW-1:0] req_addr = '0;
  logic [BANK_W-1:0] req_wdata = '0, rsp_rdata;
  logic mv [NBANK], mr [NBANK], mwe [NBANK], rv [NBANK];
  logic [AW-1:0] ma [NBANK];
  logic [BANK_W-1:0] mwd [NBANK], rd [NBANK];
  int checks = 0, failures = 0, full = 0;
  logic [BANK_W-1:0] model [16];
  logic [BANK_W-1:0] expq [$];

  vtq_mem_if dut (
    .clk, .rst_n, .req_valid, .req_ready, .req_we, .req_addr, .req_wdata, .rsp_valid, .rsp_rdata,
    .m_req_valid(mv[0]), .m_req_ready(mr[0]), .m_req_we(mwe[0]), .m_req_addr(ma[0]),
    .m_req_wdata(mwd[0]), .m_rsp_valid(rv[0]), .m_rsp_rdata(rd[0]));

  always_comb
    for (int b = 1; b < NBANK; b++) begin mv[b] = 1'b0; mwe[b] = 1'b0; ma[b] = '0; mwd[b] = '0; end

  vtq_mem_model #(.DEPTH(16), .STALL_PCT(40)) u_mem (
    .clk, .req_valid(mv), .req_ready(mr), .req_we(mwe), .req_addr(ma), .req_wdata(mwd),
    .rsp_valid(rv), .rsp_rdata(rd));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (req_valid && !req_ready) full++;
    if (rsp_valid) begin
      checks++;
      if (expq.size() == 0 || rsp_rdata != expq[0]) begin
        failures++;
        if (failures < 10) $display("FAIL read data at %0t: got %h exp %h (q %0d)", $time, rsp_rdata[31:0], expq.size() ? expq[0][31:0] : 0, expq.size());
      end
      if (expq.size() > 0) void'(expq.pop_front());
    end
  end

  initial begin
    for (int r = 0; r < 16; r++) model[r] = '0;
    repeat (10) @(posedge clk);  // flush anything the memory saw before reset
    rst_n = 1;
    for (int n = 0; n < 600; n++) begin
      @(negedge clk);
      req_valid = 1;
      req_we    = ($urandom % 2 == 0);
      req_addr  = AW'($urandom % 16);
      req_wdata = {8{$urandom}};
      #1;
      while (!req_ready) begin @(negedge clk); #1; end
      if (req_we) model[req_addr] = req_wdata;
      else expq.push_back(model[req_addr]);
      @(posedge clk);
      #1;
      req_valid = 0;
    end
    repeat (20) @(posedge clk);
    checks++;
    if (expq.size() != 0) failures++;
    checks++;
    if (full == 0) failures++;
    $display("FIFO full %0d cycles", full);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
