// tb_fp_mul: self-checking test of the single-precision multiplier.
//
// Random normal operands of both signs are multiplied; the reference is the
// double-precision product (exact for two singles) rounded to single by the
// simulator, so the result must match bit for bit.  Zero operands must give
// a zero result.
module tb_fp_mul;
  import hd_pkg::*;
  import fp_ref_pkg::*;

  fp32_t a, b, y;
  int    checks = 0, failures = 0;

  fp_mul dut (.a(a), .b(b), .y(y));

  function automatic fp32_t rnd_fp(input int emin, input int emax);
    int e;
    e = emin + int'($urandom_range(emax - emin));
    return {1'($urandom_range(1)), 8'(e), 23'($urandom)};
  endfunction

  task automatic check(input fp32_t ta, input fp32_t tb_);
    real   r;
    fp32_t exp_bits;
    a = ta; b = tb_;
    #1;
    r = fp2real(ta) * fp2real(tb_);
    exp_bits = real2fp(r);
    if (exp_bits[30:0] == 31'd0) exp_bits[31] = y[31];
    checks++;
    if (y !== exp_bits) begin
      failures++;
      if (failures < 10) $display("FAIL %h * %h = %h expected %h", ta, tb_, y, exp_bits);
    end
  endtask

  initial begin
    check(32'h3F80_0000, 32'h4040_0000); // 1 * 3
    check(32'h3FC0_0000, 32'h3FC0_0000); // 1.5 * 1.5
    check(32'h0000_0000, 32'h4040_0000); // 0 * 3
    check(32'hBF00_0000, 32'h4100_0000); // -0.5 * 8
    for (int i = 0; i < 10000; i++) check(rnd_fp(90, 160), rnd_fp(90, 160));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
