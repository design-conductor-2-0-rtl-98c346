// tb_vtq_top: end-to-end test of VerTQ at its default parameters (head
// dimension 128, 8 attention lanes, 9 memory banks of 256 bits).
// The host side writes 64 key and 64 value FP16 vectors and a query into a
// behavioural memory that stalls at random, then drives the mailbox:
//   1. COMPRESS 64 tokens. While it runs, an ATTEND is written and must be
//      ignored.
//   2. Every compressed row is checked field by field against a real-valued
//      TurboQuant model: key norm, 3-bit indices (nearest level of the rotated
//      unit key), residual norm, QJL signs, value norm and indices.
//   3. ATTEND over all 64 tokens, then over 3 tokens. Each FP16 output row
//      is compared with the real-valued attention over the compressed tokens
//      the design wrote, and, as a sanity check of the quantisation itself,
//      with exact FP attention by cosine similarity.
// Each mechanism is counted and the test fails if one never happened:
// memory stalls, lane-full back-pressure, both commands, the ignored busy
// write, completion interrupts, and merges of more than one lane.
module tb_vtq_top;
  import vtq_pkg::*;
  import vtq_tb_pkg::*;

  localparam int NT    = 64;
  localparam int ROW_K = 0;
  localparam int ROW_V = 64;
  localparam int ROW_C = 128;
  localparam int ROW_Q = 200;
  localparam int ROW_O = 201;

  logic clk = 0, rst_n = 0, h_we = 0, irq;
  logic [2:0] h_addr = '0;
  logic [31:0] h_wdata = '0, h_rdata;
  logic              m_req_valid [NBANK];
  logic              m_req_ready [NBANK];
  logic              m_req_we    [NBANK];
  logic [AW-1:0]     m_req_addr  [NBANK];
  logic [BANK_W-1:0] m_req_wdata [NBANK];
  logic              m_rsp_valid [NBANK];
  logic [BANK_W-1:0] m_rsp_rdata [NBANK];

  int checks = 0, failures = 0;
  int n_compress = 0, n_attend = 0, n_irq = 0, lane_full = 0, n_merge_multi = 0;
  bit ignored_ok = 0;
  localparam int LANES_TB = 8;
  logic [LANES_TB-1:0] used = '0;

  vtq_top u_top (.*);

  vtq_mem_model #(.DEPTH(256), .STALL_PCT(15)) u_mem (
    .clk, .req_valid(m_req_valid), .req_ready(m_req_ready), .req_we(m_req_we),
    .req_addr(m_req_addr), .req_wdata(m_req_wdata), .rsp_valid(m_rsp_valid),
    .rsp_rdata(m_rsp_rdata));

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    $display("FAIL watchdog");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism counters
  logic irq_q = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;
  always @(posedge clk) if (rst_n) begin
    irq_q <= irq;
    if (irq && !irq_q) n_irq++;
    if (u_top.cmd_valid && u_top.cmd == CMD_COMPRESS) n_compress++;
    if (u_top.cmd_valid && u_top.cmd == CMD_ATTEND) n_attend++;
    if (u_top.fa_tok_valid && !u_top.fa_tok_ready && u_top.u_flash.state == 3'd3) lane_full++;
    if (u_top.fa_start) used = '0;
    for (int k = 0; k < LANES_TB; k++) if (u_top.u_flash.l_valid[k]) used[k] = 1'b1;
    if (u_top.fa_done && $countones(used) > 1) n_merge_multi++;
  end

  task automatic chk(string w, bit ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", w);
    end
  endtask

  task automatic hw(int a, logic [31:0] d);
    @(negedge clk); h_we = 1; h_addr = 3'(a); h_wdata = d;
    @(negedge clk); h_we = 0;
  endtask

  task automatic run_cmd(cmd_e c, int a, int b, int dst, int n);
    hw(1, a); hw(2, b); hw(3, dst); hw(4, n); hw(0, c);
  endtask

  task automatic wait_irq();
    while (!irq) @(negedge clk);
    hw(5, 0);  // acknowledge
  endtask

  // raw FP16 vector row access (banks 0-7)
  task automatic put_vec(int row, vec16_t v);
    logic [BANK_W-1:0] w;
    for (int b = 0; b < 8; b++) begin
      for (int e = 0; e < 16; e++) w[16*e +: 16] = v[16*b+e];
      u_mem.mem[b][row] = w;
    end
  endtask

  function automatic vec16_t get_vec(int row);
    vec16_t v;
    logic [BANK_W-1:0] w;
    for (int b = 0; b < 8; b++) begin
      w = u_mem.mem[b][row];
      for (int e = 0; e < 16; e++) v[16*b+e] = w[16*e +: 16];
    end
    return v;
  endfunction

  function automatic ckv_t get_ckv(int row);
    logic [4*BANK_W-1:0] w;
    for (int b = 0; b < 4; b++) w[BANK_W*b +: BANK_W] = u_mem.mem[b][row];
    return ckv_t'(w[CKV_W-1:0]);
  endfunction

  rvec_t kr [NT], vr [NT], qv;
  ckv_t toks [$];

  // check one compressed token against the real-valued TurboQuant model
  task automatic check_token(int t, ckv_t c);
    rvec_t u, y, yh, uh, r, z;
    real n, g;
    n = rnorm(kr[t]);
    chk("key norm", close(h2r(c.k.norm), n, 1e-3, n, 0.0));
    for (int i = 0; i < D; i++) u[i] = kr[t][i] / n;
    y = rht_ref(u, 0);
    for (int i = 0; i < D; i++) begin
      chk("key idx", qexcess(y[i], int'(c.k.idx[i])) < 1e-4);
      yh[i] = LV[c.k.idx[i]] / $sqrt(real'(D));
    end
    uh = rht_ref(yh, 1);
    for (int i = 0; i < D; i++) r[i] = u[i] - uh[i];
    g = rnorm(r);
    chk("residual norm", close(h2r(c.k.rnorm), g, 1e-3, g, 1e-5));
    z = rad_ref(r);
    for (int j = 0; j < D; j++)
      if (rabs(z[j]) > 1e-4) chk("qjl sign", c.k.qjl[j] == (z[j] < 0.0));
    n = rnorm(vr[t]);
    chk("value norm", close(h2r(c.v.norm), n, 1e-3, n, 0.0));
    for (int i = 0; i < D; i++) u[i] = vr[t][i] / n;
    y = rht_ref(u, 0);
    for (int i = 0; i < D; i++) chk("value idx", qexcess(y[i], int'(c.v.idx[i])) < 1e-4);
  endtask

  task automatic check_attend(int n);
    ckv_t sub [$];
    rvec_t ro, ex;
    vec16_t o;
    real om, s [NT], mx, l, dot, na, nb;
    for (int t = 0; t < n; t++) sub.push_back(toks[t]);
    ro = attend_ref(qv, sub);
    om = rmaxabs(ro);
    o = get_vec(ROW_O);
    for (int i = 0; i < D; i++) chk("attend out", close(h2r(o[i]), ro[i], 3e-3, om, 0.0));
    // exact attention for comparison
    mx = -1e30;
    for (int t = 0; t < n; t++) begin
      s[t] = 0.0;
      for (int i = 0; i < D; i++) s[t] += qv[i] * kr[t][i];
      s[t] = s[t] / $sqrt(real'(D));
      if (s[t] > mx) mx = s[t];
    end
    l = 0.0;
    for (int i = 0; i < D; i++) ex[i] = 0.0;
    for (int t = 0; t < n; t++) begin
      l += $exp(s[t] - mx);
      for (int i = 0; i < D; i++) ex[i] += $exp(s[t] - mx) * vr[t][i];
    end
    dot = 0.0; na = 0.0; nb = 0.0;
    for (int i = 0; i < D; i++) begin
      ex[i] = ex[i] / l;
      dot += ex[i] * h2r(o[i]);
      na  += ex[i] * ex[i];
      nb  += h2r(o[i]) ** 2;
    end
    $display("ATTEND %0d tokens: cosine similarity to exact attention %f", n, dot / $sqrt(na * nb));
    chk("cosine", dot / $sqrt(na * nb) > 0.8);
  endtask

  initial begin
    vec16_t v;
    int t0;
    repeat (10) @(posedge clk);
    rst_n = 1;
    // workload data: keys with a few large outlier channels, unit-ish values
    for (int t = 0; t < NT; t++) begin
      for (int i = 0; i < D; i++) begin
        v[i] = r2h(((i % 37) == 5 ? 8.0 : 1.0) * gauss());
        kr[t][i] = h2r(v[i]);
      end
      put_vec(ROW_K + t, v);
      for (int i = 0; i < D; i++) begin
        v[i] = r2h(gauss());
        vr[t][i] = h2r(v[i]);
      end
      put_vec(ROW_V + t, v);
    end
    for (int i = 0; i < D; i++) begin
      v[i] = r2h(0.5 * gauss());
      qv[i] = h2r(v[i]);
    end
    put_vec(ROW_Q, v);

    // 1. compress, with an ATTEND written while busy
    t0 = cyc;
    run_cmd(CMD_COMPRESS, ROW_K, ROW_V, ROW_C, NT);
    repeat (50) @(negedge clk);
    hw(0, CMD_ATTEND);
    h_addr = 3'd5; #1;
    ignored_ok = (h_rdata[1:0] == 2'b01) && (n_attend == 0);
    wait_irq();
    $display("COMPRESS %0d tokens: %0d cycles", NT, cyc - t0);
    h_addr = 3'd5; #1;
    chk("status after compress", h_rdata == 32'h0001_0000);

    // 2. compressed rows
    for (int t = 0; t < NT; t++) begin
      toks.push_back(get_ckv(ROW_C + t));
      check_token(t, toks[t]);
    end

    // 3. attention over 64 then 3 tokens
    for (int k = 0; k < 2; k++) begin
      int n;
      n = (k == 0) ? NT : 3;
      for (int i = 0; i < 8; i++) u_mem.mem[i][ROW_O] = '0;
      t0 = cyc;
      run_cmd(CMD_ATTEND, ROW_Q, ROW_C, ROW_O, n);
      wait_irq();
      $display("ATTEND %0d tokens: %0d cycles", n, cyc - t0);
      check_attend(n);
    end

    $display("mechanisms: compress=%0d attend=%0d irq=%0d ignored_busy_write=%0d mem_stalls=%0d lane_full=%0d multi_lane_merges=%0d",
             n_compress, n_attend, n_irq, ignored_ok, u_mem.stalls, lane_full, n_merge_multi);
    chk("compress command", n_compress == 1);
    chk("attend commands", n_attend == 2);
    chk("irq", n_irq == 3);
    chk("busy write ignored", ignored_ok);
    chk("memory stalls", u_mem.stalls > 0);
    chk("lane-full back-pressure", lane_full > 0);
    chk("multi-lane merge", n_merge_multi == 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
