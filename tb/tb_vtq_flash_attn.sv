// tb_vtq_flash_attn: attention of random queries over random compressed
// tokens with the 8-lane engine, compared element by element with a
// real-valued model (pre-decode, TurboQuant-Prod scores, exact softmax,
// rotated-domain value sum, inverse rotation). The token stream is offered
// with random gaps; the test checks that the stream stalls when all lanes are
// busy, that all 8 lanes are used, that ntok = 0 gives zero and the lane
// throughput bound (ceil(ntok/8) token periods plus fixed overhead).
module tb_vtq_flash_attn;
  import vtq_pkg::*;
  import vtq_tb_pkg::*;

  logic clk = 0, rst_n = 0, start = 0, tok_valid = 0, tok_ready, busy, done;
  vec16_t q = '0, out;
  logic [15:0] ntok = '0;
  ckv_t tok = '0;
  int checks = 0, failures = 0;
  int stalls = 0;
  int lane_used [8];

  vtq_flash_attn dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (tok_valid && !tok_ready && dut.state == 3) stalls++;
    for (int k = 0; k < 8; k++) if (dut.l_valid[k]) lane_used[k]++;
  end

  task automatic chk(string w, bit ok);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", w); end
  endtask

  initial begin
    rvec_t rq, ro;
    ckv_t toks [$];
    int nt [3] = '{37, 0, 8};
    int cyc;
    real om;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 3; r++) begin
      for (int i = 0; i < D; i++) begin q[i] = r2h(gauss()); rq[i] = h2r(q[i]); end
      toks.delete();
      for (int t = 0; t < nt[r]; t++) toks.push_back(rand_tok(12.0));
      @(negedge clk); start = 1; ntok = 16'(nt[r]);
      @(negedge clk); start = 0;
      cyc = 1;
      fork
        begin
          foreach (toks[t]) begin
            repeat ($urandom % 3) @(negedge clk);
            tok = toks[t]; tok_valid = 1;
            @(posedge clk);
            while (!tok_ready) @(posedge clk);
            @(negedge clk);
            tok_valid = 0;
          end
        end
        begin
          while (!done) begin @(negedge clk); cyc++; end
        end
      join
      ro = attend_ref(rq, toks);
      om = rmaxabs(ro);
      for (int i = 0; i < D; i++)
        chk("out", (nt[r] == 0) ? out[i][14:0] == 0 : close(h2r(out[i]), ro[i], 3e-3, om, 0.0));
      $display("ntok=%0d cycles=%0d", nt[r], cyc);
      chk("throughput", cyc <= ((nt[r] + 7) / 8) * (D + 12 + 3) + 2 * D + 40);
    end
    chk("stalled", stalls > 0);
    for (int k = 0; k < 8; k++) chk("lane used", lane_used[k] > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
