// fp_add: combinational IEEE 754 single-precision adder/subtractor.
//
// y = a + b (sub = 0) or a - b (sub = 1).  The operands are aligned with a
// guard, round and sticky bit, added or subtracted as magnitudes, normalized
// with a leading-zero count, and rounded to nearest, ties to even.  Subnormal
// inputs are read as zero and subnormal results are flushed to zero;
// overflow gives infinity.  NaN and infinity inputs are not handled: the
// detector's datapath never produces them.  The paper states only that its
// arithmetic is 32-bit IEEE 754; this adder's structure and its simplified
// special cases are this design's own.  No clock: the result is valid in the
// same cycle.
module fp_add
  import hd_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  input  logic  sub,
  output fp32_t y
);

  logic        sa, sb, sl, ss;
  logic [7:0]  ea, eb, el, es;
  logic [23:0] ma, mb, ml, ms;
  logic [7:0]  diff;
  logic [26:0] ml_x, ms_x;      // mantissa with guard/round/sticky
  logic [27:0] sum;
  logic        eff_sub;
  logic [4:0]  lz;
  logic [27:0] norm;
  logic signed [9:0] exp_n;
  logic [23:0] mant_r;
  logic        rnd_up;
  logic [24:0] mant_rr;
  logic signed [9:0] exp_r;

  always_comb begin
    sa = a[31];
    sb = b[31] ^ sub;
    ea = a[30:23];
    eb = b[30:23];
    ma = (ea == 8'd0) ? 24'd0 : {1'b1, a[22:0]};
    mb = (eb == 8'd0) ? 24'd0 : {1'b1, b[22:0]};

    // order by magnitude so that the difference is never negative
    if ({ea, a[22:0]} >= {eb, b[22:0]}) begin
      sl = sa; el = ea; ml = ma; ss = sb; es = eb; ms = mb;
    end else begin
      sl = sb; el = eb; ml = mb; ss = sa; es = ea; ms = ma;
    end
    if (es == 8'd0) es = el; // zero operand: no alignment needed (mantissa is 0)
    diff    = el - es;
    eff_sub = sl ^ ss;

    ml_x = {ml, 3'b000};
    ms_x = {ms, 3'b000};
    if (diff >= 8'd27) begin
      ms_x = {26'd0, |ms};
    end else begin
      ms_x = ({ms, 3'b000} >> diff);
      // sticky: any bit shifted out
      if (diff > 8'd3)
        ms_x[0] = |(ms & ((24'd1 << (diff - 8'd3)) - 24'd1)) | ms_x[0];
    end

    sum = eff_sub ? ({1'b0, ml_x} - {1'b0, ms_x}) : ({1'b0, ml_x} + {1'b0, ms_x});

    // leading-zero count over sum[27:0]
    lz = 5'd28;
    for (int i = 0; i <= 27; i++)
      if (sum[i]) lz = 5'(27 - i);

    y = 32'd0;
    norm = 28'd0; exp_n = 10'sd0; mant_r = 24'd0; rnd_up = 1'b0;
    mant_rr = 25'd0; exp_r = 10'sd0;
    if (sum == 28'd0 || el == 8'd0) begin
      y = 32'd0;
    end else begin
      // after the shift the leading one sits at bit 27
      norm  = sum << lz;
      exp_n = $signed({2'b00, el}) + 10'sd1 - $signed({5'd0, lz});
      mant_r = norm[27:4];
      // round to nearest even: guard = norm[3], sticky = norm[2:0]
      rnd_up = norm[3] & ((|norm[2:0]) | norm[4]);
      mant_rr = {1'b0, mant_r} + {24'd0, rnd_up};
      exp_r = exp_n;
      if (mant_rr[24]) begin
        mant_rr = mant_rr >> 1;
        exp_r   = exp_n + 10'sd1;
      end
      if (exp_r >= 10'sd255)
        y = {sl, 8'hFF, 23'd0};
      else if (exp_r <= 10'sd0)
        y = {sl, 31'd0};
      else
        y = {sl, exp_r[7:0], mant_rr[22:0]};
    end
  end

endmodule
