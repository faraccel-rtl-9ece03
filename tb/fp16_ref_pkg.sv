// fp16_ref_pkg: reference FP16 arithmetic for the testbenches.
//
// Computes with double-precision reals, where the product or sum of two
// binary16 numbers is exact, and rounds the exact result to binary16 once
// (nearest even), then applies the design's range rules: results below the
// smallest normal flush to signed zero, results above the largest finite
// value become infinity. Subnormal inputs count as zero. This is written
// independently of the RTL bit manipulation it checks.
package fp16_ref_pkg;

  function automatic bit is_nan(logic [15:0] h);
    return (h[14:10] == 5'h1F) && (h[9:0] != 0);
  endfunction
  function automatic bit is_inf(logic [15:0] h);
    return (h[14:10] == 5'h1F) && (h[9:0] == 0);
  endfunction
  function automatic bit is_zero(logic [15:0] h);   // zero or subnormal
    return h[14:10] == 5'd0;
  endfunction

  function automatic real h2r(logic [15:0] h);
    real v;
    if (is_zero(h)) return h[15] ? -0.0 : 0.0;
    v = (1.0 + real'(h[9:0]) / 1024.0);
    for (int i = 0; i < int'(h[14:10]); i++) v = v * 2.0;
    for (int i = 0; i < 15; i++) v = v / 2.0;
    return h[15] ? -v : v;
  endfunction

  function automatic logic [15:0] r2h(real x);
    bit     s;
    real    ax, mant, frac;
    int     e;
    longint mi;
    s  = $realtobits(x) >> 63 != 0;
    ax = s ? -x : x;
    if (ax == 0.0) return {s, 15'd0};
    e = 0;
    while (ax >= 2.0) begin ax = ax / 2.0; e++; end
    while (ax < 1.0)  begin ax = ax * 2.0; e--; end
    mant = ax * 1024.0;
    mi   = longint'($rtoi(mant));
    frac = mant - real'(mi);
    if (frac > 0.5 || (frac == 0.5 && mi[0])) mi++;
    if (mi == 2048) begin mi = 1024; e++; end
    if (e > 15)  return {s, 5'h1F, 10'd0};
    if (e < -14) return {s, 15'd0};
    return {s, 5'(e + 15), mi[9:0]};
  endfunction

  function automatic logic [15:0] ref_mul(logic [15:0] a, logic [15:0] b);
    bit s = a[15] ^ b[15];
    if (is_nan(a) || is_nan(b)) return 16'h7E00;
    if ((is_inf(a) && is_zero(b)) || (is_zero(a) && is_inf(b))) return 16'h7E00;
    if (is_inf(a) || is_inf(b)) return {s, 5'h1F, 10'd0};
    if (is_zero(a) || is_zero(b)) return {s, 15'd0};
    return r2h(h2r(a) * h2r(b));
  endfunction

  function automatic logic [15:0] ref_add(logic [15:0] a, logic [15:0] b);
    real r;
    if (is_nan(a) || is_nan(b)) return 16'h7E00;
    if (is_inf(a) && is_inf(b)) return (a[15] == b[15]) ? a : 16'h7E00;
    if (is_inf(a)) return a;
    if (is_inf(b)) return b;
    if (is_zero(a) && is_zero(b)) return {a[15] & b[15], 15'd0};
    if (is_zero(a)) return b;
    if (is_zero(b)) return a;
    r = h2r(a) + h2r(b);
    if (r == 0.0) return 16'h0000;
    return r2h(r);
  endfunction

  // Random FP16 value of moderate magnitude (exponent field lo..hi).
  function automatic logic [15:0] rand_h(int lo, int hi);
    logic [15:0] h;
    h[15]    = 1'($urandom);
    h[14:10] = 5'(lo + int'($urandom % 32'(hi - lo + 1)));
    h[9:0]   = 10'($urandom);
    return h;
  endfunction

endpackage
