// fp_ref_pkg: reference single-precision arithmetic for the testbenches.
//
// Values are widened to double precision, where the product of two binary32
// numbers is exact and so is their sum as long as the exponents differ by
// less than about 29, then rounded once to binary32, nearest-even. Subnormal
// inputs and results are flushed to zero, matching the hardware's choice.
// rand_fp draws a normal number with an exponent within +-ESPAN of 1.0.
package fp_ref_pkg;

  function automatic real f2r(input logic [31:0] f);
    logic [10:0] e;
    if (f[30:23] == 8'd0) return $bitstoreal({f[31], 63'd0});
    e = 11'(int'(f[30:23]) - 127 + 1023);
    return $bitstoreal({f[31], e, f[22:0], 29'd0});
  endfunction

  function automatic logic [31:0] r2f(input real x);
    logic [63:0] d;
    logic [24:0] m;
    int          fe;
    d = $realtobits(x);
    if (d[62:52] == 11'd0) return {d[63], 31'd0};
    fe = int'(d[62:52]) - 1023 + 127;
    m  = {2'b01, d[51:29]};
    if (d[28] && ((|d[27:0]) || m[0])) m = m + 1'b1;
    if (m[24]) begin
      fe = fe + 1;
      m  = m >> 1;
    end
    if (fe <= 0)   return {d[63], 31'd0};
    if (fe >= 255) return {d[63], 8'hFF, 23'd0};
    return {d[63], 8'(fe), m[22:0]};
  endfunction

  function automatic logic [31:0] fmul(input logic [31:0] a, input logic [31:0] b);
    return r2f(f2r(a) * f2r(b));
  endfunction

  function automatic logic [31:0] fadd(input logic [31:0] a, input logic [31:0] b);
    real s;
    s = f2r(a) + f2r(b);
    if (s == 0.0 && !(a[31] && b[31])) return 32'd0;
    return r2f(s);
  endfunction

  function automatic logic [31:0] rand_fp(input int espan);
    int e;
    e = 127 + int'($urandom_range(2 * espan)) - espan;
    return {1'($urandom), 8'(e), 23'($urandom)};
  endfunction

endpackage
