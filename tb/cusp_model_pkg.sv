// Reference model of the cusp-like shaper and of the F2 fitness, for the
// testbenches. Written straight from the recursion
//   d^k(n) = v(n)-v(n-k), d^1(n) = v(n)-v(n-1),
//   p(n) = p(n-1) + d^k(n) - k*d^1(n-l),
//   q(n) = q(n-1) + m2*p(n), s(n) = s(n-1) + q(n) + m1*p(n),
// on 64-bit integers, with each signal wrapped to the width of the bus that
// carries it in the hardware (14, 21 and 35 bits), and signals before n = 0
// taken as zero. Also holds the synthetic reference pulse A*exp(-n/tau).
package cusp_model_pkg;

  typedef longint lq_t[$];

  function automatic longint wrap(longint x, int w);
    longint m = (64'sd1 <<< w) - 1;
    longint y = x & m;
    if (y[w-1]) y = y - (64'sd1 <<< w);
    return y;
  endfunction

  function automatic lq_t shaper(lq_t v, int k, int l, int m1, int m2);
    lq_t    s, d1;
    longint p = 0, q = 0, ss = 0;
    for (int n = 0; n < v.size(); n++) begin
      longint vk = (n >= k) ? v[n-k] : 0;
      longint v1 = (n >= 1) ? v[n-1] : 0;
      longint dk = wrap(v[n] - vk, 14);
      longint d1l;
      d1.push_back(wrap(v[n] - v1, 14));
      d1l = (n >= l) ? d1[n-l] : 0;
      p  = wrap(p + dk - wrap(d1l * k, 21), 21);
      q  = wrap(q + wrap(p * m2, 35), 35);
      ss = wrap(ss + q + wrap(p * m1, 35), 35);
      s.push_back(ss);
    end
    return s;
  endfunction

  // F2 = sum |s - s_ref|, saturating at 2^35-1 and clipped to 32 bits.
  function automatic longint f2_fitness(lq_t s, lq_t sref);
    longint acc = 0;
    for (int n = 0; n < s.size(); n++) begin
      longint d = s[n] - sref[n];
      acc += (d < 0) ? -d : d;
      if (acc > (64'sd1 <<< 35) - 1) acc = (64'sd1 <<< 35) - 1;
    end
    return (acc > 64'sd4294967295) ? 64'sd4294967295 : acc;
  endfunction

  // Exponential pulse A*exp(-n/tau) starting at sample `start`, truncated.
  function automatic lq_t exp_pulse(int len, int start, real amp, real tau);
    lq_t v;
    for (int n = 0; n < len; n++)
      v.push_back((n < start) ? 0 : longint'($floor(amp * $exp(-real'(n - start) / tau))));
    return v;
  endfunction

endpackage
