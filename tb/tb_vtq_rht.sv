// tb_vtq_rht: compares the forward and inverse randomized Hadamard transform
// with a direct real-valued matrix product (H[j][k] = (-1)^popcount(j&k)),
// checks that inverse(forward(x)) returns x, and checks the LOGD+1 latency.
module tb_vtq_rht;
  import vtq_pkg::*;
  import vtq_tb_pkg::*;

  logic clk = 0, rst_n = 0, start = 0, inverse = 0, busy, done;
  vec32_t x = '0, y, y1;
  int checks = 0, failures = 0;
  logic [D-1:0] sg;

  vtq_rht dut (.*);
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

  task automatic go(logic inv, vec32_t in);
    int lat;
    @(negedge clk); start = 1; inverse = inv; x = in;
    @(negedge clk); start = 0;
    lat = 1;
    while (!done) begin @(negedge clk); lat++; end
    chk("latency", lat == LOGD + 2);
  endtask

  initial begin
    real xs [D];
    real e, nrm;
    sg = rht_signs();
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 8; t++) begin
      vec32_t in;
      nrm = 0.0;
      for (int k = 0; k < D; k++) begin
        in[k] = r2f(gauss());
        xs[k] = f2r(in[k]);
        nrm += rabs(xs[k]);
      end
      go(t[0], in);
      for (int j = 0; j < D; j++) begin
        e = 0.0;
        for (int k = 0; k < D; k++)
          e += (($countones(j & k) % 2) ? -1.0 : 1.0) * ((!t[0] && sg[k]) ? -xs[k] : xs[k]);
        e = e / $sqrt(real'(D));
        if (t[0] && sg[j]) e = -e;
        chk(t[0] ? "inverse" : "forward", close(f2r(y[j]), e, 1e-6, nrm, 0.0));
      end
      y1 = y;
      go(!t[0], y1);
      for (int k = 0; k < D; k++) chk("roundtrip", close(f2r(y[k]), xs[k], 1e-6, nrm, 0.0));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
