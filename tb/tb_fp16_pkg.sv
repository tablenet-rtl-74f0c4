// tb_fp16_pkg: reference arithmetic for the testbenches, written apart from
// the RTL. binary16 values are decoded to real numbers and a conversion is
// found by binary search over the (monotonic) positive encodings, so the
// reference does not share the RTL's leading-one and shift logic.
package tb_fp16_pkg;

  // value of a nonnegative binary16 encoding
  function automatic real fp16_to_real(logic [15:0] h);
    int e, f;
    e = int'(h[14:10]);
    f = int'(h[9:0]);
    if (e == 0) return real'(f) * (2.0 ** -24);
    return real'(1024 + f) * (2.0 ** (e - 25));
  endfunction

  // largest finite nonnegative binary16 not above v (v >= 0)
  function automatic logic [15:0] fp16_floor(real v);
    int lo, hi, mid;
    lo = 0; hi = 16'h7BFF;
    if (v >= fp16_to_real(16'h7BFF)) return 16'h7BFF;
    while (lo < hi) begin
      mid = (lo + hi + 1) / 2;
      if (fp16_to_real(16'(mid)) <= v) lo = mid;
      else hi = mid - 1;
    end
    return 16'(lo);
  endfunction

  // r(i) = u(i)/2^D of the rounding sequence, u(i) = (i*STEP mod 2^D) + 1
  function automatic real sr_r(int i, int d);
    int one, step;
    one  = 2 ** d;
    step = ((one * 618) / 1000) | 1;
    return real'(((i * step) % one) + 1) / real'(one);
  endfunction

  // reference conversion of v >= 0; stochastic rounding uses sequence index
  // i and the D bits of the position of v between two neighbours
  function automatic logic [15:0] fp16_convert(real v, bit stoch, int i, int d,
                                               output bit sat);
    logic [15:0] t;
    real lo, hi, frac, fq;
    sat = (v > fp16_to_real(16'h7BFF));
    t   = fp16_floor(v);
    if (!stoch || t == 16'h7BFF) return t;
    lo   = fp16_to_real(t);
    hi   = fp16_to_real(t + 16'd1);
    frac = (v - lo) / (hi - lo);
    fq   = real'(int'($floor(frac * (2.0 ** d)))) / (2.0 ** d);
    // paper's rule: keep floor if r(i) <= 1 + (floor(x) - x)/eps
    if (sr_r(i, d) <= 1.0 - fq) return t;
    if (t + 16'd1 >= 16'h7C00) begin sat = 1'b1; return 16'h7BFF; end
    return t + 16'd1;
  endfunction

endpackage
