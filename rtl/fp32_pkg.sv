// fp32_pkg: IEEE-754 single-precision arithmetic used by the processing
// elements and by the pooling and threshold comparators.
//
// The accelerator computes in 32-bit floating point. The functions here are
// combinational and synthesizable:
//   fp_mul(a, b)  product, rounded to nearest-even
//   fp_add(a, b)  sum, rounded to nearest-even
//   fp_key(a)     unsigned key whose integer order equals the numeric order
//   fp_ge(a, b)   a >= b,   fp_max(a, b)  the larger of a and b
// Simplifications that are this design's own choice: subnormal inputs are
// read as zero and subnormal results are flushed to zero; an infinite or NaN
// input yields infinity; overflow yields infinity. NaN is never produced.
package fp32_pkg;

  typedef logic [31:0] fp32_t;

  localparam fp32_t FP_ZERO = 32'h0000_0000;
  localparam fp32_t FP_ONE  = 32'h3f80_0000;

  // Pack sign, biased exponent and 24-bit significand (hidden bit included)
  // with flush-to-zero and overflow-to-infinity.
  function automatic fp32_t fp_pack(input logic s, input logic signed [10:0] e,
                                    input logic [23:0] m);
    if (e >= 11'sd255) return {s, 8'hff, 23'd0};
    if (e <= 11'sd0)   return {s, 31'd0};
    return {s, e[7:0], m[22:0]};
  endfunction

  function automatic fp32_t fp_mul(input fp32_t a, input fp32_t b);
    logic               s;
    logic [47:0]        p;
    logic [24:0]        m;
    logic signed [10:0] e;
    logic               g, st;
    s = a[31] ^ b[31];
    if (a[30:23] == 8'hff || b[30:23] == 8'hff) return {s, 8'hff, 23'd0};
    if (a[30:23] == 8'd0  || b[30:23] == 8'd0)  return {s, 31'd0};
    p = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    e = $signed({3'b000, a[30:23]}) + $signed({3'b000, b[30:23]}) - 11'sd127;
    if (p[47]) begin
      m  = {1'b0, p[47:24]};
      g  = p[23];
      st = |p[22:0];
      e  = e + 11'sd1;
    end else begin
      m  = {1'b0, p[46:23]};
      g  = p[22];
      st = |p[21:0];
    end
    if (g && (st || m[0])) m = m + 25'd1;
    if (m[24]) begin
      m = m >> 1;
      e = e + 11'sd1;
    end
    return fp_pack(s, e, m[23:0]);
  endfunction

  function automatic fp32_t fp_add(input fp32_t a, input fp32_t b);
    fp32_t              x, y;
    logic [7:0]         d;
    logic [27:0]        mx, my, sum;
    logic [24:0]        m;
    logic signed [10:0] e;
    logic               st;
    int unsigned        lz;
    if (a[30:23] == 8'hff || b[30:23] == 8'hff)
      return {(a[30:23] == 8'hff) ? a[31] : b[31], 8'hff, 23'd0};
    if (a[30:23] == 8'd0 && b[30:23] == 8'd0) return {a[31] & b[31], 31'd0};
    if (a[30:23] == 8'd0) return b;
    if (b[30:23] == 8'd0) return a;
    // x has the larger magnitude
    if (a[30:0] >= b[30:0]) begin x = a; y = b; end
    else                    begin x = b; y = a; end
    d  = x[30:23] - y[30:23];
    mx = {1'b0, 1'b1, x[22:0], 3'b000};
    my = {1'b0, 1'b1, y[22:0], 3'b000};
    st = 1'b0;
    for (int i = 0; i < 28; i++)
      if (i < int'(d)) st = st | my[i];
    my = (d >= 8'd28) ? 28'd0 : (my >> d);
    my[0] = my[0] | st;
    e = $signed({3'b000, x[30:23]});
    if (x[31] == y[31]) begin
      sum = mx + my;
      if (sum[27]) begin
        sum = {1'b0, sum[27:2], sum[1] | sum[0]};
        e   = e + 11'sd1;
      end
    end else begin
      sum = mx - my;
      if (sum == 28'd0) return FP_ZERO;
      lz = 0;
      for (int i = 26; i >= 0; i--)
        if (sum[i] && lz == 0) lz = 27 - i;
      lz  = lz - 1;
      sum = sum << lz;
      e   = e - $signed(11'(lz));
    end
    // sum[26:3] significand, sum[2] guard, sum[1:0] round and sticky
    m = {1'b0, sum[26:3]};
    if (sum[2] && ((|sum[1:0]) || m[0])) m = m + 25'd1;
    if (m[24]) begin
      m = m >> 1;
      e = e + 11'sd1;
    end
    return fp_pack(x[31], e, m[23:0]);
  endfunction

  function automatic logic [31:0] fp_key(input fp32_t a);
    return a[31] ? ~a : (a | 32'h8000_0000);
  endfunction

  function automatic logic fp_ge(input fp32_t a, input fp32_t b);
    return fp_key(a) >= fp_key(b);
  endfunction

  function automatic fp32_t fp_max(input fp32_t a, input fp32_t b);
    return fp_ge(a, b) ? a : b;
  endfunction

endpackage
