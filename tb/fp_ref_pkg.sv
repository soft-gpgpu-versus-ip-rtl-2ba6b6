// fp_ref_pkg: reference FP32 arithmetic for the testbenches, computed with
// the simulator's double-precision reals and rounded to single precision
// here (round to nearest even, results below the normal range flushed to a
// signed zero, as the design does).  A product of two FP32 values is exact
// in double precision and a sum of two is rounded correctly by the double
// then single rounding, so these are the correctly rounded FP32 results.
package fp_ref_pkg;

  function automatic real f2r(input logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'd0) return 0.0;
    d = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] r2f(input real r);
    logic [63:0] d;
    logic        s;
    int          e;
    logic [52:0] m;
    logic [24:0] mr;
    logic        g, st;
    d = $realtobits(r);
    s = d[63];
    if (d[62:52] == 11'd0) return {s, 31'd0};
    e  = int'(d[62:52]) - 1023 + 127;
    m  = {1'b1, d[51:0]};
    g  = m[28];
    st = |m[27:0];
    mr = {1'b0, m[52:29]} + ((g && (st || m[29])) ? 25'd1 : 25'd0);
    if (mr[24]) begin
      mr = mr >> 1;
      e  = e + 1;
    end
    if (e >= 255) return {s, 8'hFF, 23'd0};
    if (e <= 0)   return {s, 31'd0};
    return {s, 8'(e), mr[22:0]};
  endfunction

  function automatic logic [31:0] ref_mul(input logic [31:0] a, input logic [31:0] b);
    return r2f(f2r(a) * f2r(b));
  endfunction

  function automatic logic [31:0] ref_add(input logic [31:0] a, input logic [31:0] b);
    real s;
    s = f2r(a) + f2r(b);
    if (s == 0.0) return (a[31] & b[31]) ? 32'h8000_0000 : 32'h0;
    return r2f(s);
  endfunction

  // A*B + C*D with each product rounded, then the sum rounded.
  function automatic logic [31:0] ref_dot2(input logic [31:0] a, input logic [31:0] b,
                                           input logic [31:0] c, input logic [31:0] d);
    return ref_add(ref_mul(a, b), ref_mul(c, d));
  endfunction

  // A random normal FP32 value with exponent in [127-span, 127+span].
  function automatic logic [31:0] rand_f32(input int span);
    int unsigned e;
    e = 127 - span + ($urandom % (2 * span + 1));
    return {1'($urandom), 8'(e), 23'($urandom)};
  endfunction

endpackage
