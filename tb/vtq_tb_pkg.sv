// vtq_tb_pkg: helpers shared by the VerTQ testbenches. Conversions between
// FP32/FP16 bit patterns and real numbers are done with real arithmetic,
// independently of the design's own element functions, plus a relative
// closeness test and a reference Walsh-Hadamard transform on reals.
package vtq_tb_pkg;

  function automatic real pow2(int e);
    real r;
    r = 1.0;
    if (e >= 0) for (int i = 0; i < e; i++) r = r * 2.0;
    else for (int i = 0; i < -e; i++) r = r / 2.0;
    return r;
  endfunction

  function automatic real f2r(logic [31:0] b);
    real m;
    if (b[30:23] == 8'd0) return 0.0;
    m = 1.0 + real'(b[22:0]) / 8388608.0;
    m = m * pow2(int'(b[30:23]) - 127);
    return b[31] ? -m : m;
  endfunction

  function automatic real h2r(logic [15:0] b);
    real m;
    if (b[14:10] == 5'd0) return 0.0;
    m = 1.0 + real'(b[9:0]) / 1024.0;
    m = m * pow2(int'(b[14:10]) - 15);
    return b[15] ? -m : m;
  endfunction

  function automatic logic [31:0] r2f(real x);
    real a;
    int e;
    longint m;
    if (x == 0.0) return 32'd0;
    a = (x < 0.0) ? -x : x;
    e = 0;
    while (a >= 2.0) begin a = a / 2.0; e++; end
    while (a < 1.0) begin a = a * 2.0; e--; end
    m = longint'((a - 1.0) * 8388608.0);
    if (m >= 64'd8388608) begin m = 0; e++; end
    return {(x < 0.0), 8'(e + 127), m[22:0]};
  endfunction

  function automatic logic [15:0] r2h(real x);
    real a;
    int e;
    longint m;
    if (x == 0.0) return 16'd0;
    a = (x < 0.0) ? -x : x;
    e = 0;
    while (a >= 2.0) begin a = a / 2.0; e++; end
    while (a < 1.0) begin a = a * 2.0; e--; end
    m = longint'((a - 1.0) * 1024.0);
    if (m >= 64'd1024) begin m = 0; e++; end
    if (e + 15 <= 0) return 16'd0;
    return {(x < 0.0), 5'(e + 15), m[9:0]};
  endfunction

  function automatic real rabs(real x);
    return (x < 0.0) ? -x : x;
  endfunction

  // |got - exp| <= rel * scale + abs_tol
  function automatic bit close(real got, real exp, real rel, real scale, real abs_tol);
    return rabs(got - exp) <= rel * rabs(scale) + abs_tol;
  endfunction

  // uniform real in [lo, hi)
  function automatic real urand_real(real lo, real hi);
    return lo + (hi - lo) * (real'($urandom) / 4294967296.0);
  endfunction

  // approximately N(0,1): sum of 12 uniforms minus 6
  function automatic real gauss();
    real s;
    s = 0.0;
    for (int i = 0; i < 12; i++) s += real'($urandom) / 4294967296.0;
    return s - 6.0;
  endfunction

  localparam int TD = vtq_pkg::D;
  typedef real rvec_t [TD];
  localparam real LV [8] = '{-2.152, -1.344, -0.756, -0.2451, 0.2451, 0.756, 1.344, 2.152};

  // Reference randomized Hadamard transform by direct matrix product.
  function automatic rvec_t rht_ref(rvec_t x, bit inv);
    rvec_t y;
    logic [TD-1:0] sg;
    real e;
    sg = vtq_pkg::rht_signs();
    for (int j = 0; j < TD; j++) begin
      e = 0.0;
      for (int k = 0; k < TD; k++)
        e += (($countones(j & k) % 2) ? -1.0 : 1.0) * ((!inv && sg[k]) ? -x[k] : x[k]);
      e = e / $sqrt(real'(TD));
      y[j] = (inv && sg[j]) ? -e : e;
    end
    return y;
  endfunction

  // Reference Rademacher product z = S x.
  function automatic rvec_t rad_ref(rvec_t x);
    rvec_t z;
    logic [TD-1:0] c;
    for (int j = 0; j < TD; j++) z[j] = 0.0;
    for (int i = 0; i < TD; i++) begin
      c = vtq_pkg::rad_column(i);
      for (int j = 0; j < TD; j++) z[j] += c[j] ? -x[i] : x[i];
    end
    return z;
  endfunction

  function automatic real rnorm(rvec_t x);
    real s;
    s = 0.0;
    for (int i = 0; i < TD; i++) s += x[i] * x[i];
    return $sqrt(s);
  endfunction

  // distance from a * sqrt(D) to the level of index ix, minus the distance to
  // the nearest level (0 when ix is the nearest)
  function automatic real qexcess(real a, int ix);
    real v, best;
    v = a * $sqrt(real'(TD));
    best = 1e9;
    for (int c = 0; c < 8; c++) if (rabs(v - LV[c]) < best) best = rabs(v - LV[c]);
    return rabs(v - LV[ix]) - best;
  endfunction

  // TurboQuant-Prod score estimate (scaled by 1/sqrt(D)) of a compressed key
  // against a query given in its rotated (qr) and Rademacher (qs) forms.
  function automatic real score_ref(rvec_t qr, rvec_t qs, vtq_pkg::ckey_t k);
    real a, b;
    a = 0.0;
    b = 0.0;
    for (int i = 0; i < TD; i++) begin
      a += qr[i] * LV[k.idx[i]] / $sqrt(real'(TD));
      b += k.qjl[i] ? -qs[i] : qs[i];
    end
    return h2r(k.norm) / $sqrt(real'(TD)) *
           (a + h2r(k.rnorm) * $sqrt(3.14159265358979 / 2.0) / real'(TD) * b);
  endfunction

  // Attention output over compressed tokens, in reals:
  // RHT^-1( sum_t p_t n_v,t level[idx_v,t] / sqrt(D) ) / sum_t p_t
  function automatic rvec_t attend_ref(rvec_t q, vtq_pkg::ckv_t toks [$]);
    rvec_t qr, qs, acc;
    real s [$];
    real mx, l, p;
    qr = rht_ref(q, 0);
    qs = rad_ref(q);
    for (int i = 0; i < TD; i++) acc[i] = 0.0;
    if (toks.size() == 0) return acc;
    mx = -1e30;
    foreach (toks[t]) begin
      s.push_back(score_ref(qr, qs, toks[t].k));
      if (s[t] > mx) mx = s[t];
    end
    l = 0.0;
    foreach (toks[t]) begin
      p = $exp(s[t] - mx);
      l += p;
      for (int i = 0; i < TD; i++)
        acc[i] += p * h2r(toks[t].v.norm) * LV[toks[t].v.idx[i]] / $sqrt(real'(TD));
    end
    for (int i = 0; i < TD; i++) acc[i] = acc[i] / l;
    return rht_ref(acc, 1);
  endfunction

  function automatic real rmaxabs(rvec_t x);
    real m;
    m = 0.0;
    for (int i = 0; i < TD; i++) if (rabs(x[i]) > m) m = rabs(x[i]);
    return m;
  endfunction

  // random compressed token with realistic field ranges
  function automatic vtq_pkg::ckv_t rand_tok(real knorm);
    vtq_pkg::ckv_t t;
    for (int i = 0; i < TD; i++) begin
      t.k.idx[i] = 3'($urandom);
      t.v.idx[i] = 3'($urandom);
      t.k.qjl[i] = 1'($urandom);
    end
    t.k.norm  = r2h(knorm * urand_real(0.5, 1.5));
    t.k.rnorm = r2h(urand_real(0.1, 0.25));
    t.v.norm  = r2h(urand_real(0.5, 5.0));
    return t;
  endfunction

endpackage
