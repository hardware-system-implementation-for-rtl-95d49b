// fp_mul: combinational IEEE 754 single-precision multiplier.
//
// The 24x24-bit significand product is normalized by at most one place and
// rounded to nearest, ties to even.  Subnormal inputs are read as zero,
// subnormal results flush to zero and overflow gives infinity; NaN and
// infinity inputs are not handled.  The paper states only that the design
// uses 32-bit IEEE 754 arithmetic; the structure and the simplified special
// cases are this design's own.  No clock: the result is valid in the same
// cycle.
module fp_mul
  import hd_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);

  logic              s;
  logic [23:0]       ma, mb;
  logic [47:0]       p;
  logic signed [10:0] e;
  logic [23:0]       m;
  logic              g, st, rnd;
  logic [24:0]       mr;

  always_comb begin
    s  = a[31] ^ b[31];
    ma = {1'b1, a[22:0]};
    mb = {1'b1, b[22:0]};
    p  = ma * mb;
    e  = $signed({3'b000, a[30:23]}) + $signed({3'b000, b[30:23]}) - 11'sd127;
    if (p[47]) begin
      m  = p[47:24];
      g  = p[23];
      st = |p[22:0];
      e  = e + 11'sd1;
    end else begin
      m  = p[46:23];
      g  = p[22];
      st = |p[21:0];
    end
    rnd = g & (st | m[0]);
    mr  = {1'b0, m} + {24'd0, rnd};
    if (mr[24]) begin
      mr = mr >> 1;
      e  = e + 11'sd1;
    end
    if (a[30:23] == 8'd0 || b[30:23] == 8'd0 || e <= 11'sd0)
      y = {s, 31'd0};
    else if (e >= 11'sd255)
      y = {s, 8'hFF, 23'd0};
    else
      y = {s, e[7:0], mr[22:0]};
  end

endmodule
