// jco_pkg: elaboration-time mathematics shared by the single-component DFT engines.
//
// Every engine in this design is built for one fixed DFT length N and one component index k.
// All constants the hardware needs follow from (N, k) and are computed here by constant
// functions, so a module is configured by its N and K parameters alone:
//
//   L      = N / gcd(N, k), the multiplicative order of W_N^k (order_l)
//   phi(L) = Euler totient, the degree of the cyclotomic polynomial Phi_L(x) (totient)
//   Phi_L  = prod_{d|L} (x^d - 1)^mu(L/d), integer coefficients, ascending powers (cyclo)
//   d_j    = coefficients of the denominator D(u) = u^phi Phi_L(1/u), u = z^-1 (den_coef);
//            for L >= 2 Phi_L is palindromic, so d_j are Phi_L's own coefficients and d_phi = 1
//   a_j    = coefficients of the numerator D(u) / (1 - W_N^-k u), obtained by synthetic
//            division a_0 = 1, a_j = d_j + W_N^-k a_(j-1); quantised to FRAC fraction bits
//   A      = 2 cos(2 pi k / N), the Goertzel coefficient
//
// The formulas for L, Phi_L, the Moebius product and the form of H(z) are the ones of the
// JCO method; the Moebius-product evaluation order, the synthetic division for a_j, the
// Taylor-series cos/sin and the word-growth bounds used to size registers are this design's
// own. Nothing here becomes logic: the functions are only called to set localparams.
package jco_pkg;

  // Largest polynomial degree the constant functions can hold: the Moebius product for
  // Phi_L must stay below it (it does for every L <= 120, and for every power of two L <= 256).
  // It is kept small because constant functions over large arrays elaborate slowly.
  localparam int MAXDEG = 256;
  typedef int ipoly_t [0:MAXDEG];

  localparam real PI = 3.14159265358979323846;

  function automatic int gcd(input int a, input int b);
    int x, y, t;
    x = (a < 0) ? -a : a;
    y = (b < 0) ? -b : b;
    while (y != 0) begin
      t = x % y;
      x = y;
      y = t;
    end
    return x;
  endfunction

  // Order of W_N^k: L = N / gcd(N, k mod N); k = 0 gives L = 1.
  function automatic int order_l(input int n, input int k);
    int km;
    km = ((k % n) + n) % n;
    if (km == 0) return 1;
    return n / gcd(n, km);
  endfunction

  function automatic int totient(input int l);
    int cnt;
    cnt = 0;
    for (int i = 1; i <= l; i++) if (gcd(i, l) == 1) cnt++;
    return cnt;
  endfunction

  // Moebius function: 0 if n has a squared prime factor, else (-1)^(number of primes).
  function automatic int mobius(input int n);
    int m, p, r;
    m = n;
    r = 1;
    p = 2;
    while (p * p <= m) begin
      if (m % p == 0) begin
        m = m / p;
        if (m % p == 0) return 0;
        r = -r;
      end
      p++;
    end
    if (m > 1) r = -r;
    return r;
  endfunction

  // Degree the Moebius product reaches before its divisions (all factors with mu = +1).
  function automatic int cyclo_peak_deg(input int l);
    int s;
    s = 0;
    for (int d = 1; d <= l; d++) if (l % d == 0 && mobius(l / d) == 1) s += d;
    return s;
  endfunction

  // Phi_L(x), ascending coefficients. Multiplies by every (x^d - 1) with mu(L/d) = +1 first,
  // then divides exactly by every (x^d - 1) with mu(L/d) = -1.
  function automatic ipoly_t cyclo(input int l);
    ipoly_t p, q;
    int deg, c;
    p = '{default: 0};
    p[0] = 1;
    deg = 0;
    if (cyclo_peak_deg(l) > MAXDEG) return p;
    for (int d = 1; d <= l; d++) begin
      if (l % d == 0 && mobius(l / d) == 1) begin
        // p <- p * (x^d - 1)
        for (int i = deg + d; i >= 0; i--) p[i] = ((i >= d) ? p[i-d] : 0) - p[i];
        deg += d;
      end
    end
    for (int d = 1; d <= l; d++) begin
      if (l % d == 0 && mobius(l / d) == -1) begin
        // p <- p / (x^d - 1), exact: the quotient collects in q
        q = '{default: 0};
        for (int i = deg; i >= d; i--) begin
          c = p[i];
          q[i-d] = c;
          p[i-d] += c;
          p[i] = 0;
        end
        p = q;
        deg -= d;
      end
    end
    return p;
  endfunction

  // Denominator of H(z) in u = z^-1: D(u) = u^phi Phi_L(1/u), so D(0) = 1.
  function automatic ipoly_t den_coef(input int n, input int k);
    ipoly_t c, r;
    int l, ph;
    l = order_l(n, k);
    ph = totient(l);
    c = cyclo(l);
    r = '{default: 0};
    for (int j = 0; j <= ph; j++) r[j] = c[ph - j];
    if (r[0] < 0) for (int j = 0; j <= ph; j++) r[j] = -r[j];
    return r;
  endfunction

  // cos and sin by Taylor series after reduction to [-pi, pi].
  function automatic real reduce(input real x);
    real y;
    y = x;
    while (y > PI) y -= 2.0 * PI;
    while (y < -PI) y += 2.0 * PI;
    return y;
  endfunction

  function automatic real cosr(input real x);
    real y, t, s;
    y = reduce(x);
    t = 1.0;
    s = 1.0;
    for (int i = 1; i < 40; i++) begin
      t = -t * y * y / ((2.0 * i - 1.0) * (2.0 * i));
      s += t;
    end
    return s;
  endfunction

  function automatic real sinr(input real x);
    real y, t, s;
    y = reduce(x);
    t = y;
    s = y;
    for (int i = 1; i < 40; i++) begin
      t = -t * y * y / ((2.0 * i) * (2.0 * i + 1.0));
      s += t;
    end
    return s;
  endfunction

  // Angle of W_N^-k = exp(+j 2 pi k / N).
  function automatic real theta(input int n, input int k);
    int km;
    km = ((k % n) + n) % n;
    return 2.0 * PI * real'(km) / real'(n);
  endfunction

  function automatic int quant(input real x, input int frac);
    real s;
    s = x;
    for (int i = 0; i < frac; i++) s = s * 2.0;
    return int'(s);
  endfunction

  // Numerator a_j = coefficients of D(u) / (1 - W_N^-k u), j = 0 .. phi-1, quantised.
  // want_im = 0 returns the real parts, 1 the imaginary parts.
  function automatic ipoly_t num_coef(input int n, input int k, input int frac, input bit want_im);
    ipoly_t d, q;
    real cr, ci, ar, ai, tr;
    int ph;
    d = den_coef(n, k);
    ph = totient(order_l(n, k));
    cr = cosr(theta(n, k));
    ci = sinr(theta(n, k));
    q = '{default: 0};
    ar = 1.0;
    ai = 0.0;
    q[0] = want_im ? 0 : quant(1.0, frac);
    for (int j = 1; j < ph; j++) begin
      tr = real'(d[j]) + cr * ar - ci * ai;
      ai = ci * ar + cr * ai;
      ar = tr;
      q[j] = want_im ? quant(ai, frac) : quant(ar, frac);
    end
    return q;
  endfunction

  // Goertzel coefficient A = 2 cos(2 pi k / N) and the evaluation constants cos, sin of the
  // same angle, all with frac fraction bits.
  function automatic int goertzel_a(input int n, input int k, input int frac);
    return quant(2.0 * cosr(theta(n, k)), frac);
  endfunction
  function automatic int cos_q(input int n, input int k, input int frac);
    return quant(cosr(theta(n, k)), frac);
  endfunction
  function automatic int sin_q(input int n, input int k, input int frac);
    return quant(sinr(theta(n, k)), frac);
  endfunction

  // Bound on sum_{i=0..n} |h_i|, h the impulse response of 1/D(u). h is periodic with
  // period L (1/Phi_L(u) has all its poles at L-th roots of unity), so one period suffices.
  function automatic longint filt_gain(input int n, input int k);
    ipoly_t d;
    int h [0:MAXDEG];
    int nz [0:MAXDEG];
    int l, ph, nnz, acc, nper;
    longint per;
    d = den_coef(n, k);
    l = order_l(n, k);
    ph = totient(l);
    nnz = 0;
    for (int j = 1; j <= ph; j++) if (d[j] != 0) begin nz[nnz] = j; nnz++; end
    per = 0;
    for (int i = 0; i < l && i <= MAXDEG; i++) begin
      acc = (i == 0) ? 1 : 0;
      for (int t = 0; t < nnz; t++) if (i >= nz[t]) acc -= d[nz[t]] * h[i - nz[t]];
      h[i] = acc;
      if (acc < 0) acc = -acc;
      per += longint'(acc);
    end
    nper = (n + l) / l;
    return per * longint'(nper);
  endfunction

  // Bound on any coefficient of v(x) mod Phi_L(x), in units of max |v_n|, for up to n+1 terms:
  // x^i mod Phi_L is periodic in i with period L, so one period is summed per position.
  function automatic longint rem_gain(input int n, input int k);
    ipoly_t c;
    int r [0:MAXDEG];
    longint s [0:MAXDEG];
    int l, ph, t;
    longint m;
    l = order_l(n, k);
    ph = totient(l);
    c = cyclo(l);
    for (int j = 0; j < ph; j++) begin r[j] = 0; s[j] = 0; end
    r[0] = 1;
    for (int i = 0; i < l; i++) begin
      for (int j = 0; j < ph; j++) begin
        t = (r[j] < 0) ? -r[j] : r[j];
        s[j] += longint'(t);
      end
      // r <- x * r mod Phi_L
      t = r[ph-1];
      for (int j = ph - 1; j > 0; j--) r[j] = r[j-1] - t * c[j];
      r[0] = -t * c[0];
    end
    m = 0;
    for (int j = 0; j < ph; j++) if (s[j] > m) m = s[j];
    t = (n + l) / l;
    return m * longint'(t);
  endfunction

  // Number of bits b with 2^b > x, for x >= 0.
  function automatic int bits_for(input longint x);
    int b;
    b = 0;
    while ((longint'(1) << b) <= x) b++;
    return b;
  endfunction


  // Width of a V_k output part: |V_k| <= N 2^(DATA_W-1), plus frac fraction bits and one
  // bit of margin for coefficient rounding.
  function automatic int out_w(input int n, input int data_w, input int frac);
    return data_w + bits_for(longint'(n)) + frac + 1;
  endfunction

endpackage
