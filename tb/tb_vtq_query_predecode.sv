// tb_vtq_query_predecode: random FP16 queries; qr must match a real-valued
// randomized Hadamard transform and qs a real-valued Rademacher product.
module tb_vtq_query_predecode;
  import vtq_pkg::*;
  import vtq_tb_pkg::*;

  logic clk = 0, rst_n = 0, start = 0, busy, done;
  vec16_t q = '0;
  vec32_t qr, qs;
  int checks = 0, failures = 0;

  vtq_query_predecode dut (.*);
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
    rvec_t x, er, es;
    real nrm;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 5; t++) begin
      nrm = 0.0;
      for (int i = 0; i < D; i++) begin q[i] = r2h(2.0 * gauss()); x[i] = h2r(q[i]); nrm += rabs(x[i]); end
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      er = rht_ref(x, 0);
      es = rad_ref(x);
      for (int j = 0; j < D; j++) begin
        chk("qr", close(f2r(qr[j]), er[j], 1e-6, nrm, 0.0));
        chk("qs", close(f2r(qs[j]), es[j], 1e-6, nrm, 0.0));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
