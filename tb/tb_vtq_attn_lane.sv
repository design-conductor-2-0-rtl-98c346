// tb_vtq_attn_lane: feeds random compressed tokens to one lane, back to back,
// for two queries. After every token the score is compared with a real-valued
// TurboQuant-Prod estimate; at the end of each query the softmax state
// (m, l and all D accumulator elements) is compared with a real-valued online
// softmax. Also checks the D+12-cycle token period and the clear.
module tb_vtq_attn_lane;
  import vtq_pkg::*;
  import vtq_tb_pkg::*;

  logic clk = 0, rst_n = 0, clear = 0, tok_valid = 0, tok_ready, empty;
  vec32_t qr = '0, qs = '0, acc;
  ckv_t tok = '0;
  fp32_t m, l, score;
  int checks = 0, failures = 0;

  vtq_attn_lane dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string w, bit ok);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", w); end
  endtask

  initial begin
    rvec_t rq, rs, ra;
    real s [$];
    real mx, rl, p, am;
    ckv_t toks [$];
    int last, now;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int qn = 0; qn < 2; qn++) begin
      for (int i = 0; i < D; i++) begin
        qr[i] = r2f(gauss()); rq[i] = f2r(qr[i]);
        qs[i] = r2f(gauss() * 4.0); rs[i] = f2r(qs[i]);
      end
      @(negedge clk); clear = 1;
      @(negedge clk); clear = 0;
      chk("cleared", empty && l == FP_ZERO);
      toks.delete(); s.delete();
      last = -1;
      for (int n = 0; n < 12; n++) begin
        tok = rand_tok(qn ? 30.0 : 8.0);
        toks.push_back(tok);
        tok_valid = 1;
        #1;
        while (!tok_ready) begin @(negedge clk); #1; end
        @(negedge clk);
        tok_valid = 0;
        #1;
        // the lane is idle again once the token is fully accumulated
        while (!tok_ready) begin @(negedge clk); #1; end
        s.push_back(score_ref(rq, rs, toks[n].k));
        chk("score", close(f2r(score), s[n], 1e-5, rabs(s[n]) + 1.0, 0.0));
      end
      // period: measure one more back-to-back pair
      mx = -1e30;
      foreach (s[t]) if (s[t] > mx) mx = s[t];
      rl = 0.0;
      for (int i = 0; i < D; i++) ra[i] = 0.0;
      foreach (s[t]) begin
        p = $exp(s[t] - mx);
        rl += p;
        for (int i = 0; i < D; i++) ra[i] += p * h2r(toks[t].v.norm) * LV[toks[t].v.idx[i]] / $sqrt(real'(D));
      end
      am = rmaxabs(ra);
      chk("m", close(f2r(m), mx, 1e-5, rabs(mx) + 1.0, 0.0));
      chk("l", close(f2r(l), rl, 1e-3, rl, 0.0));
      for (int i = 0; i < D; i++) chk("acc", close(f2r(acc[i]), ra[i], 1e-3, am, 0.0));
    end
    // token period with back-to-back tokens
    // two tokens offered back to back: accepts must be D+12 cycles apart
    tok = rand_tok(8.0);
    tok_valid = 1;
    now = 0;
    #1;
    while (!tok_ready) begin @(negedge clk); #1; end
    last = now;
    @(negedge clk);
    now++;
    #1;
    while (!tok_ready) begin @(negedge clk); now++; #1; end
    tok_valid = 0;
    chk("period", now - last == D + 12);
    $display("token period %0d cycles", now - last);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
