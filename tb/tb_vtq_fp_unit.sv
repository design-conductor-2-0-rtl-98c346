// tb_vtq_fp_unit: checks every element of the FP unit against real-valued
// arithmetic on random operands, and the one-cycle latency of the unit.
module tb_vtq_fp_unit;
  import vtq_pkg::*;
  import vtq_tb_pkg::*;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, out_valid;
  fpop_e op = OP_ADD;
  fp32_t a = '0, b = '0, c = '0, y;
  int checks = 0, failures = 0;

  vtq_fp_unit dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic fp32_t rnd(int elo, int ehi, bit pos);
    fp32_t v;
    v = $urandom;
    v[30:23] = 8'(elo + int'($urandom % (ehi - elo + 1)));
    if (pos) v[31] = 1'b0;
    return v;
  endfunction

  task automatic run(fpop_e o, fp32_t x, fp32_t yy, fp32_t z, output fp32_t res);
    @(negedge clk);
    op = o; a = x; b = yy; c = z; in_valid = 1;
    @(posedge clk); #1;
    in_valid = 0;
    checks++;
    if (!out_valid) begin failures++; $display("FAIL latency op=%s", o.name()); end
    res = y;
    @(posedge clk); #1;
    checks++;
    if (out_valid) begin failures++; $display("FAIL valid held op=%s", o.name()); end
  endtask

  task automatic chk(string what, bit ok, fp32_t x, fp32_t yy, fp32_t r);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s a=%h b=%h got=%h (%g)", what, x, yy, r, f2r(r));
    end
  endtask

  initial begin
    fp32_t x, yy, z, r;
    real ex;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      x = rnd(115, 135, 0); yy = rnd(115, 135, 0); z = rnd(115, 135, 0);
      run(OP_ADD, x, yy, z, r);
      ex = f2r(x) + f2r(yy);
      chk("add", close(f2r(r), ex, 1.2e-7, rabs(f2r(x)) + rabs(f2r(yy)), 0.0), x, yy, r);
      run(OP_SUB, x, yy, z, r);
      ex = f2r(x) - f2r(yy);
      chk("sub", close(f2r(r), ex, 1.2e-7, rabs(f2r(x)) + rabs(f2r(yy)), 0.0), x, yy, r);
      run(OP_MUL, x, yy, z, r);
      ex = f2r(x) * f2r(yy);
      chk("mul", close(f2r(r), ex, 6.0e-8, ex, 0.0), x, yy, r);
      run(OP_FMA, x, yy, z, r);
      ex = f2r(x) * f2r(yy) + f2r(z);
      chk("fma", close(f2r(r), ex, 2.4e-7, rabs(f2r(x) * f2r(yy)) + rabs(f2r(z)), 0.0), x, yy, r);
      run(OP_RECIP, x, yy, z, r);
      ex = 1.0 / f2r(x);
      chk("recip", close(f2r(r), ex, 5.0e-7, ex, 0.0), x, yy, r);
      x = rnd(100, 150, 1);
      run(OP_RSQRT, x, yy, z, r);
      ex = 1.0 / $sqrt(f2r(x));
      chk("rsqrt", close(f2r(r), ex, 1.0e-6, ex, 0.0), x, yy, r);
      run(OP_SQRT, x, yy, z, r);
      ex = $sqrt(f2r(x));
      chk("sqrt", close(f2r(r), ex, 1.0e-6, ex, 0.0), x, yy, r);
      x = r2f(urand_real(0.0, 30.0));
      run(OP_EXPNEG, x, yy, z, r);
      ex = $exp(-f2r(x));
      chk("expneg", close(f2r(r), ex, 6.0e-4, ex, 1.0e-30), x, yy, r);
      x = {16'd0, r2h(urand_real(-1000.0, 1000.0))};
      run(OP_F16TO32, x, yy, z, r);
      chk("f16to32", f2r(r) == h2r(x[15:0]), x, yy, r);
      x = r2f(urand_real(-60000.0, 60000.0));
      run(OP_F32TO16, x, yy, z, r);
      chk("f32to16", close(h2r(r[15:0]), f2r(x), 4.9e-4, f2r(x), 0.0), x, yy, r);
      x = rnd(120, 130, 0); yy = rnd(120, 130, 0);
      run(OP_MAX, x, yy, z, r);
      chk("max", f2r(r) == ((f2r(x) > f2r(yy)) ? f2r(x) : f2r(yy)), x, yy, r);
    end
    // corner cases: exact cancellation, zero operands, exp(0)
    x = r2f(3.25);
    run(OP_SUB, x, x, '0, r); chk("cancel", r[30:0] == 31'd0, x, x, r);
    run(OP_ADD, x, 32'h0000_1234, '0, r); chk("daz", r == x, x, 32'h1234, r);
    run(OP_MUL, x, 32'h0, '0, r); chk("mulzero", r[30:0] == 0, x, 0, r);
    run(OP_EXPNEG, 32'h0, '0, '0, r); chk("exp0", r == FP_ONE, 0, 0, r);
    run(OP_EXPNEG, r2f(200.0), '0, '0, r); chk("expbig", r == FP_ZERO, 0, 0, r);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
