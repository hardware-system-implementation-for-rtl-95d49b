// tb_cordic: self-checking test of the CORDIC magnitude/angle unit.
//
// Drives every X in 0..255 against a spread of Y values in -255..255 (plus
// random pairs) and compares with sqrt(X^2+Y^2) and atan2(Y, X) in degrees
// computed in double precision.  The flowchart leaves the loop as soon as
// Y reaches 0 but still divides by the full 15-iteration gain K; a loop
// model below finds that iteration count L, and the expected magnitude is
// then sqrt(X^2+Y^2) * G(L) / 1.6467 with G(L) the gain of L iterations.  Tolerances: 0.05 degrees for the angle
// (the printed angle table is rounded to 0.001 degree) and 0.3% + 2^-8 for
// the magnitude.  When Y = 0 the flowchart skips the 1/K scaling, so the
// magnitude must equal X exactly and the angle must be 0.
module tb_cordic;
  import hd_pkg::*;

  logic signed [GRAD_W-1:0] xi, yi;
  logic        [CW-1:0]     mag;
  logic signed [AW-1:0]     angle;
  int checks = 0, failures = 0;

  cordic dut (.x_in(xi), .y_in(yi), .mag(mag), .angle(angle));

  // number of iterations the flowchart runs before Y becomes 0
  function automatic int loops(input int x, input int y);
    longint cx, cy, nx;
    cx = longint'(x) * 4096; cy = longint'(y) * 4096;
    for (int n = 0; n < 15; n++) begin
      if (cy == 0) return n;
      nx = (cy > 0) ? cx + (cy >>> n) : cx - (cy >>> n);
      cy = (cy > 0) ? cy - (cx >>> n) : cy + (cx >>> n);
      cx = nx;
    end
    return 15;
  endfunction

  task automatic check(input int x, input int y);
    real m_ref, a_ref, m_got, a_got, g;
    int  l;
    xi = GRAD_W'(x); yi = GRAD_W'(y);
    #1;
    l = loops(x, y);
    g = 1.0;
    for (int n = 0; n < l; n++) g = g * $sqrt(1.0 + 1.0 / real'(1 << (2 * n)));
    m_ref = $sqrt(real'(x * x + y * y)) * g / 1.6467;
    a_ref = (x == 0 && y == 0) ? 0.0 : $atan2(real'(y), real'(x)) * 180.0 / 3.14159265358979;
    m_got = real'(mag) / real'(1 << CFRAC);
    a_got = real'(angle) / 65536.0;
    checks++;
    if (y == 0) begin
      if (mag != CW'(x) << CFRAC || angle != 0) begin
        failures++;
        if (failures < 10) $display("FAIL y=0 x=%0d mag=%f angle=%f", x, m_got, a_got);
      end
    end else if ((m_got - m_ref > 0.003 * m_ref + 0.004) || (m_ref - m_got > 0.003 * m_ref + 0.004) ||
                 (a_got - a_ref > 0.05) || (a_ref - a_got > 0.05)) begin
      failures++;
      if (failures < 10)
        $display("FAIL x=%0d y=%0d mag=%f (%f) angle=%f (%f)", x, y, m_got, m_ref, a_got, a_ref);
    end
  endtask

  initial begin
    for (int x = 0; x <= 255; x++)
      for (int y = -255; y <= 255; y += 17) check(x, y);
    for (int x = 0; x <= 255; x += 5) check(x, 0);
    for (int i = 0; i < 5000; i++)
      check(int'($urandom_range(255)), int'($urandom_range(510)) - 255);
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
