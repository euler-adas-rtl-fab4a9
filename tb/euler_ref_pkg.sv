// euler_ref_pkg: reference model used by the testbenches.
//
// Written independently of the RTL: the decoder negates negative words and
// scans the regime bit by bit, the multiplier model is a plain loop, and the
// encoder finds the result by a binary search over posit patterns, comparing
// exact fixed-point values, instead of building the bit string.
package euler_ref_pkg;

  typedef struct {
    bit       sign;
    bit       zero;
    bit       nar;
    int       sf;      // value = mant * 2^(sf - fw)
    longint   mant;    // leading one at bit fw (0 for zero / NaR)
  } dec_t;

  function automatic int fw_of(int n, int es);
    return n - 3 - es;
  endfunction

  // Decode a bounded posit by negating and scanning.
  function automatic dec_t ref_decode(longint unsigned p, int n, int es, int r);
    dec_t d;
    longint unsigned v, mask;
    int pos, run, first, k, e, fw, nfrac;
    longint f;
    mask = (n == 64) ? '1 : ((64'd1 << n) - 1);
    p = p & mask;
    d.sign = p[n-1];
    d.zero = (p == 0);
    d.nar  = (p == (64'd1 << (n-1)));
    d.sf = 0;
    d.mant = 0;
    if (d.zero || d.nar) return d;
    v = d.sign ? ((~p + 1) & mask) : p;
    pos = n - 2;
    first = v[pos];
    run = 0;
    while (pos >= 0 && v[pos] == first && run < r) begin
      run++;
      pos--;
    end
    if (run < r) pos--;        // terminating bit
    k = first ? run - 1 : -run;
    e = 0;
    for (int i = 0; i < es; i++) begin
      e = e * 2 + ((pos >= 0) ? int'(v[pos]) : 0);
      pos--;
    end
    fw = fw_of(n, es);
    f = 0;
    nfrac = 0;
    while (pos >= 0) begin
      f = f * 2 + longint'(v[pos]);
      nfrac++;
      pos--;
    end
    d.sf = k * (1 << es) + e;
    d.mant = ((64'd1 << nfrac) | f) << (fw - nfrac);
    return d;
  endfunction

  // Keep the t most significant bits of a significand with leading one at fw.
  function automatic longint ref_trunc(longint m, int fw, int t);
    if (t <= 0 || t > fw) return m;
    return (m >> (fw + 1 - t)) << (fw + 1 - t);
  endfunction

  // Iterative logarithmic multiplier, ns stages.
  function automatic longint unsigned ref_ilm(longint unsigned x, longint unsigned y, int ns);
    longint unsigned p;
    int kx, ky;
    p = 0;
    for (int i = 0; i < ns; i++) begin
      if (x == 0 || y == 0) break;
      kx = 63;
      while (x[kx] == 0) kx--;
      ky = 63;
      while (y[ky] == 0) ky--;
      x = x - (64'd1 << kx);
      y = y - (64'd1 << ky);
      p = p + (64'd1 << (kx + ky)) + (x << ky) + (y << kx);
    end
    return p;
  endfunction

  // Lane geometry of a mode index (0: P8, 1: P16, 2: P32).
  function automatic int n_m(int m);   return 8 << m;   endfunction
  function automatic int es_m(int m);  return m;        endfunction
  function automatic int qw_m(int m);  return 32 << m;  endfunction

  // Quire layout, same definition as the engine documentation gives.
  function automatic int pmag_m(int m, int r); return 2 * r * (1 << es_m(m)); endfunction
  function automatic int drop_m(int m, int r);
    int d;
    d = 2 * fw_of(n_m(m), es_m(m)) + 2 + 2 * pmag_m(m, r) - (qw_m(m) - 1 - 5);
    return (d > 0) ? d : 0;
  endfunction
  function automatic int qf_m(int m, int r);
    return 2 * fw_of(n_m(m), es_m(m)) - drop_m(m, r) + pmag_m(m, r);
  endfunction

  // Exact magnitude of a non-zero posit pattern in a fixed-point frame with
  // qf fraction bits.
  function automatic logic [255:0] ref_value_fx(longint unsigned p, int n, int es, int r, int qf);
    dec_t d;
    int sh;
    d  = ref_decode(p, n, es, r);
    sh = d.sf - fw_of(n, es) + qf;
    if (sh >= 0) return 256'(d.mant) << sh;
    return 256'(d.mant) >> (-sh);
  endfunction

  // Round a signed fixed-point value (qf fraction bits) to the nearest
  // bounded posit, ties to the even pattern; saturating at maxpos/minpos.
  function automatic longint unsigned ref_encode_fx(logic signed [255:0] q, int n, int es, int r, int qf);
    logic [255:0] a, vlo, vhi;
    longint unsigned lo, hi, mid, res, maxp;
    bit neg;
    if (q == 0) return 0;
    neg = q[255];
    a = neg ? -q : q;
    maxp = (64'd1 << (n - 1)) - 1;
    if (a >= ref_value_fx(maxp, n, es, r, qf)) res = maxp;
    else if (a <= ref_value_fx(1, n, es, r, qf)) res = 1;
    else begin
      // largest lo with value(lo) <= a
      lo = 1;
      hi = maxp;
      while (hi - lo > 1) begin
        mid = (lo + hi) / 2;
        if (ref_value_fx(mid, n, es, r, qf) <= a) lo = mid;
        else hi = mid;
      end
      vlo = ref_value_fx(lo, n, es, r, qf);
      vhi = ref_value_fx(hi, n, es, r, qf);
      if (vlo == a) res = lo;
      else if (2 * a < vlo + vhi) res = lo;
      else if (2 * a > vlo + vhi) res = hi;
      else res = lo[0] ? hi : lo;
    end
    if (neg) res = (~res + 1) & ((n == 64) ? '1 : ((64'd1 << n) - 1));
    return res;
  endfunction

endpackage
