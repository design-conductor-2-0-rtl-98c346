// tb_vtq_mailbox: register write/read-back, command start pulse with its
// arguments, a command written while busy being ignored, completion raising
// the done bit, irq and the completed-command count, and the done bit
// clearing on a STATUS write.
module tb_vtq_mailbox;
  import vtq_pkg::*;

  logic clk = 0, rst_n = 0, h_we = 0, irq, cmd_valid, cmd_done = 0;
  logic [2:0] h_addr = '0;
  logic [31:0] h_wdata = '0, h_rdata;
  cmd_e cmd;
  logic [AW-1:0] arg_a, arg_b, arg_dst;
  logic [15:0] arg_count;
  int checks = 0, failures = 0, starts = 0;

  vtq_mailbox dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (cmd_valid) starts++;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string w, bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", w); end
  endtask

  task automatic wr(int a, logic [31:0] d);
    @(negedge clk); h_we = 1; h_addr = 3'(a); h_wdata = d;
    @(negedge clk); h_we = 0;
  endtask

  logic [31:0] rv;
  task automatic rd(int a);
    h_addr = 3'(a);
    #1;
    rv = h_rdata;
  endtask

  initial begin
    logic [31:0] v;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    rd(5); chk("idle status", rv == 32'd0);
    for (int k = 1; k <= 4; k++) begin
      v = $urandom;
      wr(k, v);
      rd(k); chk("readback", rv == v);
    end
    wr(1, 32'h11); wr(2, 32'h22); wr(3, 32'h33); wr(4, 32'd5);
    @(negedge clk); h_we = 1; h_addr = 0; h_wdata = CMD_ATTEND;
    @(posedge clk); #1; h_we = 0;
    chk("start pulse", cmd_valid && cmd == CMD_ATTEND && arg_a == 'h11 && arg_b == 'h22 &&
                       arg_dst == 'h33 && arg_count == 16'd5);
    @(posedge clk); #1;
    chk("pulse one cycle", !cmd_valid);
    rd(5); chk("busy", rv == 32'd1);
    wr(0, CMD_COMPRESS);
    rd(0); chk("ignored while busy", starts == 1 && rv == CMD_ATTEND);
    @(negedge clk); cmd_done = 1;
    @(negedge clk); cmd_done = 0;
    rd(5); chk("done", rv == 32'h0001_0002 && irq);
    wr(5, 0);
    rd(5); chk("done cleared", rv == 32'h0001_0000 && !irq);
    wr(0, 32'h7f);
    chk("bad command ignored", starts == 1);
    wr(0, CMD_COMPRESS);
    @(posedge clk); #1;
    rd(5); chk("second start", starts == 2 && rv == 32'h0001_0001);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
