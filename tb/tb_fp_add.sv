// tb_fp_add: self-checking test of the single-precision adder.
//
// Random normal operands (both signs, exponents close and far apart,
// including exact cancellation and zero operands) are added and subtracted;
// the expected result is the double-precision sum rounded to single
// precision by the simulator.  Rounding twice (to double, then to single)
// could in principle differ from
// the adder's single rounding.  It cannot here: the exact sum of two
// singles whose exponents differ by at most 29 fits in a double, and for a
// larger difference the smaller operand is far below half a unit in the last
// place of the result.  So the result must match bit for bit.
module tb_fp_add;
  import hd_pkg::*;
  import fp_ref_pkg::*;

  fp32_t a, b, y;
  logic  sub;
  int    checks = 0, failures = 0;

  fp_add dut (.a(a), .b(b), .sub(sub), .y(y));

  function automatic fp32_t rnd_fp(input int emin, input int emax);
    int e;
    e = emin + int'($urandom_range(emax - emin));
    return {1'($urandom_range(1)), 8'(e), 23'($urandom)};
  endfunction

  task automatic check(input fp32_t ta, input fp32_t tb_, input logic ts);
    real   r;
    fp32_t exp_bits;
    a = ta; b = tb_; sub = ts;
    #1;
    r = ts ? (fp2real(ta) - fp2real(tb_))
           : (fp2real(ta) + fp2real(tb_));
    exp_bits = real2fp(r);
    if (exp_bits[30:0] == 31'd0) exp_bits = 32'd0;
    checks++;
    if (y != exp_bits) begin
      failures++;
      if (failures < 10)
        $display("FAIL %h %s %h = %h expected %h", ta, ts ? "-" : "+", tb_, y, exp_bits);
    end
  endtask

  initial begin
    fp32_t x;
    // fixed cases
    check(32'h3F80_0000, 32'h3F80_0000, 1'b0); // 1 + 1
    check(32'h3F80_0000, 32'h3F80_0000, 1'b1); // 1 - 1 = 0
    check(32'h4049_0FDB, 32'h0000_0000, 1'b0); // x + 0
    check(32'h0000_0000, 32'hC049_0FDB, 1'b0); // 0 + y
    check(32'h3F80_0000, 32'h3380_0000, 1'b0); // 1 + 2^-24 (tie to even)
    check(32'h3F80_0001, 32'h3380_0000, 1'b0); // tie, round up to even
    check(32'h4B80_0000, 32'h3F80_0000, 1'b1); // 2^24 - 1
    for (int i = 0; i < 4000; i++) begin
      x = rnd_fp(110, 140);
      check(x, rnd_fp(110, 140), 1'($urandom_range(1)));
      check(x, rnd_fp(124, 130), 1'($urandom_range(1)));
      check(x, {~x[31], x[30:0]}, 1'b0);       // exact cancellation
      check(x, {x[31], x[30:1], ~x[0]}, 1'b1); // near cancellation
    end
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
