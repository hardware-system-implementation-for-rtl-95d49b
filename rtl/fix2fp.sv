// fix2fp: unsigned fixed-point number to IEEE 754 single precision.
//
// The input has W bits of which FRAC are fraction bits.  A leading-one
// search sets the exponent and the significand is the 24 bits below and
// including the leading one; further bits are truncated (for the detector's
// gradient magnitudes, W - 1 <= 24 significant bits, so the conversion is
// exact).  Zero converts to +0; the input is unsigned, so the sign bit of y
// is always 0.  Combinational.  A helper of the histogram
// unit; the paper only states that the arithmetic is IEEE 754 single.
module fix2fp
  import hd_pkg::*;
#(
  parameter int unsigned W    = 24,
  parameter int unsigned FRAC = 12
) (
  input  logic [W-1:0] x,
  output fp32_t        y
);

  int unsigned lead;
  logic [W+23:0] sh;

  always_comb begin
    lead = 0;
    for (int unsigned i = 0; i < W; i++)
      if (x[i]) lead = i;
    // place the leading one at bit W+23, keep the next 23 bits as fraction
    sh = {x, 24'd0} << (W - 1 - lead);
    if (x == '0)
      y = FP_ZERO;
    else
      y = {1'b0, 8'(int'(lead) - int'(FRAC) + 127), sh[W+22:W]};
  end

endmodule
