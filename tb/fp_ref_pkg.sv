// fp_ref_pkg: reference conversions between single-precision bit patterns
// and the simulator's double-precision real, used by the testbenches.
// real -> single rounds the double's 52-bit fraction to 23 bits, to nearest,
// ties to even; results below the normal range become zero.
package fp_ref_pkg;

  function automatic real fp2real(input logic [31:0] f);
    real m;
    int  e;
    if (f[30:23] == 8'd0) return 0.0;
    m = 1.0 + real'(f[22:0]) / 8388608.0;
    e = int'(f[30:23]) - 127;
    m = m * (2.0 ** e);
    return f[31] ? -m : m;
  endfunction

  function automatic logic [31:0] real2fp(input real r);
    logic [63:0] d;
    logic        s;
    int          e;
    logic [52:0] fr;
    logic [24:0] m;
    logic        g, st;
    d  = $realtobits(r);
    s  = d[63];
    e  = int'(d[62:52]) - 1023 + 127;
    if (d[62:52] == 11'd0) return {s, 31'd0};
    fr = {1'b1, d[51:0]};
    m  = {1'b0, fr[52:29]};
    g  = fr[28];
    st = |fr[27:0];
    if (g && (st || m[0])) m = m + 25'd1;
    if (m[24]) begin
      m = m >> 1;
      e = e + 1;
    end
    if (e <= 0) return {s, 31'd0};
    if (e >= 255) return {s, 8'hFF, 23'd0};
    return {s, 8'(e), m[22:0]};
  endfunction

endpackage
