// tb_vtq_attn_output: random partial softmax states for 8 lanes (some lanes
// empty); the merged, normalised and inverse-rotated FP16 output is compared
// with a real-valued merge. Also covers the all-empty case (zero output).
module tb_vtq_attn_output;
  import vtq_pkg::*;
  import vtq_tb_pkg::*;
  localparam int LANES = 8;

  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic empty [LANES];
  fp32_t m [LANES], l [LANES];
  vec32_t acc [LANES];
  vec16_t out;
  int checks = 0, failures = 0;

  vtq_attn_output #(.LANES(LANES)) dut (.*);
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
    rvec_t a, o;
    real mx, lsum, f, om;
    bit any;
    for (int j = 0; j < LANES; j++) begin empty[j] = 1; m[j] = '0; l[j] = '0; acc[j] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 6; t++) begin
      any = 0;
      for (int j = 0; j < LANES; j++) begin
        empty[j] = (t == 5) ? 1'b1 : ($urandom % 4 == 0);
        m[j] = r2f(urand_real(-5.0, 5.0));
        l[j] = r2f(urand_real(1.0, 6.0));
        for (int i = 0; i < D; i++) acc[j][i] = r2f(gauss());
        if (!empty[j]) any = 1;
      end
      if (!any && t != 5) empty[0] = 0;
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      mx = -1e30;
      for (int j = 0; j < LANES; j++) if (!empty[j] && f2r(m[j]) > mx) mx = f2r(m[j]);
      lsum = 0.0;
      for (int i = 0; i < D; i++) a[i] = 0.0;
      for (int j = 0; j < LANES; j++) if (!empty[j]) begin
        f = $exp(f2r(m[j]) - mx);
        lsum += f * f2r(l[j]);
        for (int i = 0; i < D; i++) a[i] += f * f2r(acc[j][i]);
      end
      if (t == 5) begin
        for (int i = 0; i < D; i++) chk("zero", out[i][14:0] == 15'd0);
      end else begin
        for (int i = 0; i < D; i++) a[i] = a[i] / lsum;
        o = rht_ref(a, 1);
        om = rmaxabs(o);
        for (int i = 0; i < D; i++) chk("out", close(h2r(out[i]), o[i], 2e-3, om, 0.0));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
