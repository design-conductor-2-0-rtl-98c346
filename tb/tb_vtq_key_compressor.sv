// tb_vtq_key_compressor: random FP16 keys of several magnitudes. A real-valued
// model of TurboQuant-Prod recomputes every stage: the key norm, the rotated
// unit key and its nearest codebook levels, the residual after the inverse
// rotation of the dequantised levels, its norm, and the signs of S r. The test
// also checks that the 3-bit quantisation error stays in the expected range.
module tb_vtq_key_compressor;
  import vtq_pkg::*;
  import vtq_tb_pkg::*;

  logic clk = 0, rst_n = 0, start = 0, busy, done;
  vec16_t k = '0;
  ckey_t ck;
  int checks = 0, failures = 0;

  vtq_key_compressor dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string w, bit ok);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", w); end
  endtask

  initial begin
    rvec_t kr, u, y, yh, uh, r, z;
    real n, g, sc;
    int lat;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 6; t++) begin
      sc = urand_real(0.05, 6.0);
      for (int i = 0; i < D; i++) begin k[i] = r2h(sc * gauss()); kr[i] = h2r(k[i]); end
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      lat = 1;
      while (!done) begin @(negedge clk); lat++; end
      if (t == 0) $display("key compressor latency %0d cycles", lat);
      n = rnorm(kr);
      chk("norm", close(h2r(ck.norm), n, 1e-3, n, 0.0));
      for (int i = 0; i < D; i++) u[i] = kr[i] / n;
      y = rht_ref(u, 0);
      for (int i = 0; i < D; i++) begin
        chk("idx", qexcess(y[i], int'(ck.idx[i])) < 1e-4);
        yh[i] = LV[ck.idx[i]] / $sqrt(real'(D));
      end
      uh = rht_ref(yh, 1);
      for (int i = 0; i < D; i++) r[i] = u[i] - uh[i];
      g = rnorm(r);
      chk("rnorm", close(h2r(ck.rnorm), g, 1e-3, g, 1e-5));
      chk("mse", g * g < 0.07 && g * g > 0.005);
      z = rad_ref(r);
      for (int j = 0; j < D; j++)
        if (rabs(z[j]) > 1e-4) chk("qjl", ck.qjl[j] == (z[j] < 0.0));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
