// fp16_ref_pkg: reference binary16 arithmetic for the testbenches.
//
// Values are converted to real, the operation is done exactly in double
// precision (any binary16 product or sum is exact there) and the result is
// rounded back to binary16, to nearest even, with subnormal results flushed
// to zero and overflow to infinity - the same rules the datapath follows.
package fp16_ref_pkg;

  function automatic real f2r(logic [15:0] h);
    real m, v;
    int  e;
    if (h[14:10] == 0) return 0.0;
    m = 1.0 + real'(h[9:0]) / 1024.0;
    e = int'(h[14:10]) - 15;
    v = m;
    if (e > 0) repeat (e) v = v * 2.0;
    if (e < 0) repeat (-e) v = v / 2.0;
    return h[15] ? -v : v;
  endfunction

  function automatic logic [15:0] r2f(real v);
    logic s;
    real  a, frac, rem;
    int   e, q;
    if (v == 0.0) return 16'd0;
    s = (v < 0.0);
    a = s ? -v : v;
    e = 0;
    while (a >= 2.0) begin a = a / 2.0; e++; end
    while (a < 1.0)  begin a = a * 2.0; e--; end
    frac = (a - 1.0) * 1024.0;
    q    = int'($floor(frac));
    rem  = frac - real'(q);
    if (rem > 0.5 || (rem == 0.5 && (q % 2) == 1)) q++;
    if (q == 1024) begin q = 0; e++; end
    if (e + 15 >= 31) return {s, 5'h1f, 10'd0};
    if (e + 15 <= 0)  return 16'd0;
    return {s, 5'(e + 15), 10'(q)};
  endfunction

  function automatic logic [15:0] ref_add(logic [15:0] a, logic [15:0] b);
    return r2f(f2r(a) + f2r(b));
  endfunction

  function automatic logic [15:0] ref_mul(logic [15:0] a, logic [15:0] b);
    return r2f(f2r(a) * f2r(b));
  endfunction

  // Equal as numbers (+0 and -0 compare equal).
  function automatic bit same(logic [15:0] a, logic [15:0] b);
    if (a[14:10] == 0 && b[14:10] == 0) return 1'b1;
    return a == b;
  endfunction

  // Random normal binary16 value with exponent in [15-span, 15+span], or zero
  // with the given percentage.
  function automatic logic [15:0] rnd(int span, int zero_pct);
    if (int'($urandom_range(99)) < zero_pct) return 16'd0;
    return {1'($urandom), 5'(15 - span + int'($urandom_range(2 * span))), 10'($urandom)};
  endfunction

endpackage
