// tb_vtq_value_compressor: random FP16 values; a real-valued TurboQuant-MSE
// model checks the stored norm and that every index is the nearest codebook
// level of the rotated unit value.
module tb_vtq_value_compressor;
  import vtq_pkg::*;
  import vtq_tb_pkg::*;

  logic clk = 0, rst_n = 0, start = 0, busy, done;
  vec16_t v = '0;
  cval_t cv;
  int checks = 0, failures = 0;

  vtq_value_compressor dut (.*);
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
    rvec_t vr, u, y;
    real n, sc;
    int lat;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 8; t++) begin
      sc = urand_real(0.05, 6.0);
      for (int i = 0; i < D; i++) begin v[i] = r2h(sc * gauss()); vr[i] = h2r(v[i]); end
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      lat = 1;
      while (!done) begin @(negedge clk); lat++; end
      if (t == 0) $display("value compressor latency %0d cycles", lat);
      n = rnorm(vr);
      chk("norm", close(h2r(cv.norm), n, 1e-3, n, 0.0));
      for (int i = 0; i < D; i++) u[i] = vr[i] / n;
      y = rht_ref(u, 0);
      for (int i = 0; i < D; i++) chk("idx", qexcess(y[i], int'(cv.idx[i])) < 1e-4);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
