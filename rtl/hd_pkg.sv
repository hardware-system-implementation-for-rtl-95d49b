// hd_pkg: types and constants shared by the HOG + SVM human detector.
//
// The detector works on a 130x66 (rows x columns) 8-bit grayscale window,
// split into 16x8 cells of 8x8 pixels; 2x2-cell blocks overlap by one cell,
// giving 15x7 blocks of 36 features, 3780 features in all.  Those sizes are
// the paper's.  Histograms, normalization and the SVM dot product use IEEE 754
// single precision (the paper's choice); the CORDIC works in fixed point, as
// the shift-and-add structure of its block diagram implies.  Fixed-point
// widths, the normalization epsilon and the Newton-Raphson seed are this
// design's own choices.
package hd_pkg;

  typedef logic [31:0] fp32_t;

  // Geometry of the HOG descriptor (paper's numbers)
  localparam int unsigned BINS        = 9;   // orientation bins per cell
  localparam int unsigned CELL        = 8;   // cell edge in pixels
  localparam int unsigned WIN         = CELL + 2; // cell plus 1-pixel border
  localparam int unsigned BLOCK_ELEMS = 4 * BINS; // 36 features per block

  // One cell histogram: BINS single-precision values, bin 0 in the low word
  typedef logic [BINS-1:0][31:0] hist_t;

  // CORDIC (Fig. 7 / Fig. 8): 15 iterations, n = 0..14
  localparam int unsigned CORDIC_N    = 15;
  localparam int unsigned GRAD_W      = 9;   // signed pixel difference, -255..255
  localparam int unsigned CFRAC       = 12;  // fraction bits of the x/y datapath
  localparam int unsigned CW          = GRAD_W + 2 + CFRAC + 1; // 24: room for CORDIC gain
  localparam int unsigned AFRAC       = 16;  // angle: degrees with 16 fraction bits
  localparam int unsigned AW          = 25;  // signed, covers +-255 degrees
  // 1/K with K = 1.6467 (Fig. 7), as round(2^16 / 1.6467)
  localparam logic [16:0] KINV_Q16    = 17'd39798;

  // Angle table of Fig. 7 in degrees, stored as round(deg * 2^16)
  function automatic logic signed [AW-1:0] atan_table(input int unsigned n);
    case (n)
      0:  return 25'sd2949120;  // 45
      1:  return 25'sd1740964;  // 26.565
      2:  return 25'sd919863;   // 14.036
      3:  return 25'sd466944;   // 7.125
      4:  return 25'sd234357;   // 3.576
      5:  return 25'sd117309;   // 1.790
      6:  return 25'sd58655;    // 0.895
      7:  return 25'sd29360;    // 0.448
      8:  return 25'sd14680;    // 0.224
      9:  return 25'sd7340;     // 0.112
      10: return 25'sd3670;     // 0.056
      11: return 25'sd1835;     // 0.028
      12: return 25'sd918;      // 0.014
      13: return 25'sd459;      // 0.007
      default: return 25'sd262; // 0.004
    endcase
  endfunction

  // Bin edges: unsigned orientation 0..180 degrees in 9 bins of 20 degrees
  localparam logic signed [AW-1:0] DEG20  = 25'sd1310720;   // 20 * 2^16
  localparam logic signed [AW-1:0] DEG180 = 25'sd11796480;  // 180 * 2^16

  // Floating-point constants
  localparam fp32_t FP_ZERO      = 32'h0000_0000;
  localparam fp32_t FP_THREEHALF = 32'h3FC0_0000; // 1.5
  localparam fp32_t FP_EPS_SQ    = 32'h3C23_D70A; // epsilon^2 = 0.01 (epsilon = 0.1)
  localparam logic [31:0] RSQRT_MAGIC = 32'h5F37_59DF; // seed for 1/sqrt

endpackage
