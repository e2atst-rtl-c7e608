// fp16_ref_pkg: reference binary16 arithmetic for the testbenches, written
// with `real` (double precision) so that it shares no code with the RTL.
// Sums and products of two binary16 values are exact in double precision,
// and quotients and square roots rounded first to double and then to
// binary16 are still correctly rounded, so r2f(op(f2r(a), f2r(b))) is the
// correctly rounded result. The conventions match the RTL: round to nearest
// even, subnormal inputs read as zero, results below 2^-14 flushed to +0, all
// zeros returned as +0, overflow to infinity.
package fp16_ref_pkg;

  function automatic real f2r(logic [15:0] h);
    real v;
    int  e;
    e = int'(h[14:10]);
    if (e == 0) return 0.0;
    if (e == 31) return (h[9:0] != 0) ? (0.0 / 0.0) : (h[15] ? -1.0e300 * 1.0e300 : 1.0e300 * 1.0e300);
    v = (1024.0 + real'(h[9:0])) / 1024.0;
    v = v * (2.0 ** (e - 15));
    return h[15] ? -v : v;
  endfunction

  function automatic logic [15:0] r2f(real r);
    logic s;
    real  a, m, fr;
    int   e, ip, be;
    if (r == 0.0) return 16'h0000;
    if (r != r) return 16'h7E00;                       // NaN
    if (r > 1.0e6)  return 16'h7C00;                   // far beyond 65504
    if (r < -1.0e6) return 16'hFC00;
    s = (r < 0.0);
    a = s ? -r : r;
    e = 0;
    while (a >= 2.0) begin a = a / 2.0; e++; end
    while (a < 1.0)  begin a = a * 2.0; e--; end
    m  = a * 1024.0;
    ip = int'($floor(m));
    fr = m - real'(ip);
    if (fr > 0.5 || (fr == 0.5 && (ip % 2) == 1)) ip++;
    if (ip == 2048) begin ip = 1024; e++; end
    be = e + 15;
    if (be >= 31) return {s, 5'd31, 10'd0};
    if (be <= 0)  return 16'h0000;
    return {s, be[4:0], ip[9:0]};
  endfunction

  function automatic logic [15:0] radd(logic [15:0] a, logic [15:0] b);
    return r2f(f2r(a) + f2r(b));
  endfunction
  function automatic logic [15:0] rsub(logic [15:0] a, logic [15:0] b);
    return r2f(f2r(a) - f2r(b));
  endfunction
  function automatic logic [15:0] rmul(logic [15:0] a, logic [15:0] b);
    return r2f(f2r(a) * f2r(b));
  endfunction
  function automatic logic [15:0] rdiv(logic [15:0] a, logic [15:0] b);
    return r2f(f2r(a) / f2r(b));
  endfunction
  function automatic logic [15:0] rsqrt(logic [15:0] a);
    return r2f($sqrt(f2r(a)));
  endfunction

  // random normal binary16 with magnitude in [2^(lo-15), 2^(hi-14))
  function automatic logic [15:0] rnd(int lo, int hi);
    logic [15:0] h;
    int e;
    e = lo + int'($urandom_range(0, hi - lo));
    h = {1'($urandom_range(0, 1)), 5'(e), 10'($urandom_range(0, 1023))};
    return h;
  endfunction

endpackage
