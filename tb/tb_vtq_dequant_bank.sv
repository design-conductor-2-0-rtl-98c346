// tb_vtq_dequant_bank: random indices; each output must equal the Lloyd-Max
// level of its index divided by sqrt(D), one cycle after in_valid.
module tb_vtq_dequant_bank;
  import vtq_pkg::*;
  import vtq_tb_pkg::*;

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  idxvec_t idx = '0;
  vec32_t y;
  int checks = 0, failures = 0;
  localparam real LV [8] = '{-2.152, -1.344, -0.756, -0.2451, 0.2451, 0.756, 1.344, 2.152};

  vtq_dequant_bank dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      for (int k = 0; k < D; k++) idx[k] = 3'($urandom);
      @(negedge clk); in_valid = 1;
      @(negedge clk); in_valid = 0;
      checks++;
      if (!out_valid) failures++;
      for (int k = 0; k < D; k++) begin
        checks++;
        if (!close(f2r(y[k]), LV[idx[k]] / $sqrt(real'(D)), 1e-6, 1.0, 0.0)) begin
          failures++;
          if (failures < 20) $display("FAIL idx %0d got %f", idx[k], f2r(y[k]));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
