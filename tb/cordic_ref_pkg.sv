// cordic_ref_pkg: reference model of one pixel's HOG vote, used by the
// testbenches of the histogram unit and the whole detector.
//
// The angle comes from atan2 in double precision.  The magnitude is
// sqrt(fx^2 + fy^2) scaled the way the CORDIC flowchart scales it: the loop
// stops when Y reaches 0, yet X is always divided by the full gain
// K = 1.6467, so the result is |g| * G(L) / K, with G(L) the gain of the L
// iterations actually run (no scaling when L = 0).  L is found by running
// the flowchart's add/shift recurrence on integers.
package cordic_ref_pkg;

  localparam real PI = 3.14159265358979;

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

  // vote of a pixel with gradients fx, fy: bin (0..8), magnitude, and
  // whether its angle lies within 0.05 degree of a bin edge
  task automatic vote(input int fx, input int fy, output int bin, output real mag,
                      output bit near_edge);
    int  x, y, l;
    real a, g, rem;
    x = fy; y = fx;                 // theta = arctan(fx / fy)
    if (x < 0) begin x = -x; y = -y; end
    l = loops(x, y);
    g = 1.0;
    for (int n = 0; n < l; n++) g = g * $sqrt(1.0 + 1.0 / real'(1 << (2 * n)));
    mag = $sqrt(real'(x * x + y * y));
    if (l > 0) mag = mag * g / 1.6467;
    a = (y == 0) ? 0.0 : $atan2(real'(y), real'(x)) * 180.0 / PI;
    if (a < 0.0) a = a + 180.0;
    if (a >= 180.0) a = a - 180.0;
    bin = int'($floor(a / 20.0));
    if (bin > 8) bin = 8;
    rem = a - 20.0 * $floor(a / 20.0);
    near_edge = (y != 0) && (rem < 0.05 || rem > 19.95);
  endtask

endpackage
