// fp_ref_pkg: reference FP32 arithmetic for the testbenches, computed through
// the simulator's double-precision `real` type.
//
// A single FP32 add or multiply evaluated exactly in double precision and then
// rounded once to FP32 gives the correctly rounded FP32 result (double has more
// than 2*24+2 significand bits). r2f performs that final round-to-nearest-even
// itself, from the bit pattern of the double, because the simulator's
// $shortrealtobits does not narrow. Results that fall below the smallest
// normal number are flushed to zero, matching the hardware's number handling.
package fp_ref_pkg;
  function automatic real f2r(input logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'd0) return f[31] ? -0.0 : 0.0;
    d = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] r2f(input real r);
    logic [63:0] d;
    int          e;
    logic [24:0] m;       // hidden + 23 + carry room
    logic        g, st;
    d = $realtobits(r);
    if (d[62:0] == '0) return {d[63], 31'd0};
    e  = int'(d[62:52]) - 1023 + 127;
    m  = {2'b01, d[51:29]};
    g  = d[28];
    st = |d[27:0];
    if (g && (st || m[0])) m = m + 25'd1;
    if (m[24]) begin m = m >> 1; e = e + 1; end
    if (e >= 255) return {d[63], 8'hff, 23'd0};
    if (e <= 0)   return {d[63], 31'd0};
    return {d[63], 8'(e), m[22:0]};
  endfunction

  function automatic logic [31:0] fmul(input logic [31:0] a, input logic [31:0] b);
    return r2f(f2r(a) * f2r(b));
  endfunction

  function automatic logic [31:0] fadd(input logic [31:0] a, input logic [31:0] b);
    logic [31:0] r;
    if (a[30:0] == '0 && b[30:0] == '0) return {a[31] & b[31], 31'd0};
    r = r2f(f2r(a) + f2r(b));
    if (r[30:0] == '0) return 32'd0;
    return r;
  endfunction

  // Random normal FP32 number with exponent in [127-span, 127+span].
  function automatic logic [31:0] rand_f(input int span);
    logic [7:0] e;
    e = 8'(127 - span + int'($urandom_range(2 * span, 0)));
    return {1'($urandom), e, 23'($urandom)};
  endfunction

  // FP32 encoding of a small integer.
  function automatic logic [31:0] int2f(input int v);
    return r2f(real'(v));
  endfunction
endpackage
