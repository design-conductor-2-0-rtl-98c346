// tb_vtq_rademacher: compares z = S r with a real-valued product built from
// the matrix definition, checks the D-cycle latency, and checks that the
// matrix is balanced (close to half of its entries negative).
module tb_vtq_rademacher;
  import vtq_pkg::*;
  import vtq_tb_pkg::*;

  logic clk = 0, rst_n = 0, start = 0, busy, done;
  vec32_t r = '0, z;
  int checks = 0, failures = 0;

  vtq_rademacher dut (.*);
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
    logic [D-1:0] s [D];
    real rs [D];
    real e, nrm;
    int neg, lat;
    neg = 0;
    for (int i = 0; i < D; i++) begin s[i] = rad_column(i); neg += $countones(s[i]); end
    chk("balanced", neg > D * D * 45 / 100 && neg < D * D * 55 / 100);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 6; t++) begin
      nrm = 0.0;
      for (int k = 0; k < D; k++) begin r[k] = r2f(gauss()); rs[k] = f2r(r[k]); nrm += rabs(rs[k]); end
      @(negedge clk); start = 1;
      @(negedge clk); start = 0; r = '0;
      lat = 1;
      while (!done) begin @(negedge clk); lat++; end
      chk("latency", lat == D + 1);
      for (int j = 0; j < D; j++) begin
        e = 0.0;
        for (int i = 0; i < D; i++) e += s[i][j] ? -rs[i] : rs[i];
        chk("z", close(f2r(z[j]), e, 1e-6, nrm, 0.0));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
