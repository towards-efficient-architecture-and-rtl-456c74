// fp_ref_pkg: reference single-precision arithmetic for the testbenches,
// built on the simulator's double-precision reals and independent of the
// design's fp32_pkg. A product or sum of two singles is computed in double
// and then rounded once to single (nearest-even); for these operations the
// double rounding is known to give the correctly rounded single result.
// Subnormals are flushed to zero, as the design does.
package fp_ref_pkg;

  function automatic real to_real(input logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'd0) return 0.0;
    d = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] to_fp32(input real r);
    logic [63:0] d;
    int          e;
    logic [24:0] m;
    logic        g, st;
    d = $realtobits(r);
    if (d[62:52] == 11'd0) return {d[63], 31'd0};
    e  = int'(d[62:52]) - 1023 + 127;
    m  = {1'b0, 1'b1, d[51:29]};
    g  = d[28];
    st = |d[27:0];
    if (g && (st || m[0])) m = m + 1;
    if (m[24]) begin m = m >> 1; e = e + 1; end
    if (e >= 255) return {d[63], 8'hff, 23'd0};
    if (e <= 0)   return {d[63], 31'd0};
    return {d[63], 8'(e), m[22:0]};
  endfunction

  // random normal single with exponent in [127-span, 127+span]
  function automatic logic [31:0] rand_fp(input int span);
    logic [31:0] f;
    int          e;
    e = 127 - span + int'($urandom_range(0, 2 * span));
    f = {1'($urandom), 8'(e), 23'($urandom)};
    return f;
  endfunction

  function automatic logic [31:0] ref_mul(input logic [31:0] a, input logic [31:0] b);
    return to_fp32(to_real(a) * to_real(b));
  endfunction

  function automatic logic [31:0] ref_add(input logic [31:0] a, input logic [31:0] b);
    return to_fp32(to_real(a) + to_real(b));
  endfunction

endpackage
