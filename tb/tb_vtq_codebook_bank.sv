// tb_vtq_codebook_bank: random coordinates of the size seen after rotating a
// unit vector; the expected index is the nearest Lloyd-Max level, found by
// real-valued distance. Also checks the one-cycle latency.
module tb_vtq_codebook_bank;
  import vtq_pkg::*;
  import vtq_tb_pkg::*;

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  vec32_t y = '0;
  idxvec_t idx;
  int checks = 0, failures = 0;
  localparam real LV [8] = '{-2.152, -1.344, -0.756, -0.2451, 0.2451, 0.756, 1.344, 2.152};

  vtq_codebook_bank dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real v, best, dd;
    int bi;
    int hist [8];
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      for (int k = 0; k < D; k++) y[k] = r2f(1.3 * gauss() / $sqrt(real'(D)));
      @(negedge clk); in_valid = 1;
      @(negedge clk); in_valid = 0;
      checks++;
      if (!out_valid) failures++;
      for (int k = 0; k < D; k++) begin
        v = f2r(y[k]) * $sqrt(real'(D));
        best = 1e9; bi = 0;
        for (int c = 0; c < 8; c++) begin
          dd = rabs(v - LV[c]);
          if (dd < best) begin best = dd; bi = c; end
        end
        checks++;
        hist[idx[k]]++;
        if (idx[k] != 3'(bi) && rabs(rabs(v - LV[idx[k]]) - best) > 1e-4) begin
          failures++;
          if (failures < 20) $display("FAIL v=%f got %0d exp %0d", v, idx[k], bi);
        end
      end
    end
    for (int c = 0; c < 8; c++) begin checks++; if (hist[c] == 0) failures++; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
