// cordic: gradient magnitude and angle by vectoring-mode CORDIC.
//
// Follows the paper's flowchart (Fig. 7) step for step, unrolled into the
// 15-stage shift-and-add array of its block diagram (Fig. 8, shifts >>0 to
// >>14, angle constants Alpha 0..14).  Each stage n looks at the sign of Y:
//   Y > 0 : X += Y>>n, Y -= X>>n, Z += AngTable[n]
//   Y < 0 : X -= Y>>n, Y += X>>n, Z -= AngTable[n]
//   Y = 0 : the loop has ended; the stage passes X, Y, Z on unchanged.
// After the last stage Angle = Z and Magnitude = X/K with K = 1.6467, except
// when Y was already 0 on entry (no iteration done), where Magnitude = X.
// The angle table holds the flowchart's printed values (45, 26.565, ...,
// 0.004 degrees) in fixed point.  Fig. 8 draws the add/subtract choice from
// sgn(z), the rotation-mode form; this module takes it from the sign of Y,
// as the flowchart does, because only that form computes arctan and the
// magnitude.  Vectoring converges for X >= 0; the caller folds X < 0.
//
// Interface: x_in, y_in are signed integers (the pixel gradients); mag is
// unsigned with CFRAC fraction bits; angle is signed degrees with AFRAC
// fraction bits, within about +-100 degrees.  Purely combinational (the
// diagram shows no registers); the caller registers the outputs.
// The fixed-point widths are this design's choice.
module cordic
  import hd_pkg::*;
(
  input  logic signed [GRAD_W-1:0] x_in,
  input  logic signed [GRAD_W-1:0] y_in,
  output logic        [CW-1:0]     mag,
  output logic signed [AW-1:0]     angle
);

  logic signed [CW-1:0] x [CORDIC_N+1];
  logic signed [CW-1:0] y [CORDIC_N+1];
  logic signed [AW-1:0] z [CORDIC_N+1];
  logic [CW+16:0]       scaled;

  always_comb begin
    x[0] = CW'(x_in) <<< CFRAC;
    y[0] = CW'(y_in) <<< CFRAC;
    z[0] = '0;
    for (int n = 0; n < CORDIC_N; n++) begin
      if (y[n] == '0) begin
        x[n+1] = x[n];
        y[n+1] = y[n];
        z[n+1] = z[n];
      end else if (y[n] > 0) begin
        x[n+1] = x[n] + (y[n] >>> n);
        y[n+1] = y[n] - (x[n] >>> n);
        z[n+1] = z[n] + atan_table(n);
      end else begin
        x[n+1] = x[n] - (y[n] >>> n);
        y[n+1] = y[n] + (x[n] >>> n);
        z[n+1] = z[n] - atan_table(n);
      end
    end
    angle  = z[CORDIC_N];
    scaled = {17'd0, x[CORDIC_N]} * {{(CW){1'b0}}, KINV_Q16};
    // LoopNum = 0 (Y was 0 on entry): Magnitude = X; otherwise X / K
    if (y_in == '0) mag = x[CORDIC_N];
    else            mag = scaled[CW+15:16];
  end

endmodule
