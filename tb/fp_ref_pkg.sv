// fp_ref_pkg: real-number reference helpers shared by the testbenches.
//
// h2r converts an FP16 bit pattern to a real (subnormals read as zero, infinities as
// +/-1e30); r2h rounds a real to FP16 the way the design does (round to nearest, ties
// away from zero, results below the smallest normal flushed to signed zero, overflow to
// infinity); p2 is an exact power of two. Values formed from at most two FP16 operands
// (sums, products) are exact in a real, so r2h(h2r(a) op h2r(b)) is a bit-exact
// reference for the design's FP16 add, subtract and multiply.
package fp_ref_pkg;
  function automatic real p2(input int e);
    real r = 1.0;
    if (e >= 0) for (int i = 0; i < e; i++) r = r * 2.0;
    else        for (int i = 0; i < -e; i++) r = r / 2.0;
    return r;
  endfunction

  function automatic real h2r(input logic [15:0] h);
    real m;
    if (h[14:10] == 0) return 0.0;
    if (h[14:10] == 31) return h[15] ? -1.0e30 : 1.0e30;
    m = (1024.0 + real'(h[9:0])) / 1024.0 * p2(int'(h[14:10]) - 15);
    return h[15] ? -m : m;
  endfunction

  function automatic logic [15:0] r2h(input real x);
    logic s;
    real a, m;
    int e;
    longint mi;
    s = (x < 0.0);
    a = s ? -x : x;
    if (a == 0.0) return {s, 15'd0};
    if (a >= 65520.0) return {s, 5'd31, 10'd0};
    e = 0;
    while (a >= p2(e + 1)) e++;
    while (a < p2(e)) e--;
    m  = a / p2(e) * 1024.0;        // [1024, 2048)
    mi = longint'($floor(m + 0.5));
    if (mi == 2048) begin mi = 1024; e++; end
    if (e > 15) return {s, 5'd31, 10'd0};
    if (e < -14) return {s, 15'd0};
    return {s, 5'(e + 15), 10'(mi - 1024)};
  endfunction

  // random normal FP16 with exponent field in [elo, ehi]
  function automatic logic [15:0] rnd_h(input int elo, input int ehi);
    return {1'($urandom), 5'($urandom_range(elo, ehi)), 10'($urandom)};
  endfunction
endpackage
