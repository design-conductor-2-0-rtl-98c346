// tb_vtq_vec_norm: random vectors of several scales and a zero vector; checks
// the norm, its reciprocal and every unit-vector element against real
// arithmetic, and the latency of D+2 cycles.
module tb_vtq_vec_norm;
  import vtq_pkg::*;
  import vtq_tb_pkg::*;

  logic clk = 0, rst_n = 0, start = 0, busy, done;
  vec32_t x = '0, u;
  fp32_t norm, inv_norm;
  int checks = 0, failures = 0;

  vtq_vec_norm dut (.*);
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
    real xs [D];
    real ss, n, sc;
    int lat;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 12; t++) begin
      sc = (t == 11) ? 0.0 : urand_real(0.01, 50.0);
      ss = 0.0;
      for (int k = 0; k < D; k++) begin
        x[k] = r2f(sc * gauss());
        xs[k] = f2r(x[k]);
        ss += xs[k] * xs[k];
      end
      n = $sqrt(ss);
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      lat = 1;
      while (!done) begin @(negedge clk); lat++; end
      chk("latency", lat == D + 3);
      chk("norm", close(f2r(norm), n, 2e-6, n, 0.0));
      if (n > 0.0) chk("inv_norm", close(f2r(inv_norm), 1.0 / n, 2e-6, 1.0 / n, 0.0));
      for (int k = 0; k < D; k++)
        chk("u", close(f2r(u[k]), (n > 0.0) ? xs[k] / n : 0.0, 3e-6, 1.0, 0.0) &&
                 (n > 0.0 || u[k][30:0] == 0));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
