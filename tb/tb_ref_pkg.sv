// tb_ref_pkg: reference models for the testbenches, written independently of
// the RTL: real-valued phase space and matrix element for e+e- -> mu+mu-,
// the SU(3) colour matrix of gg -> ttbar + n gluons, and fixed-point
// conversion helpers.
package tb_ref_pkg;

  localparam real PI    = 3.14159265358979323846;
  localparam real SCALE = 1024.0;
  // electroweak inputs (same values as the RTL defaults, in GeV)
  localparam real EBEAM_GEV = 750.0;
  localparam real MZ_GEV    = 91.188;
  localparam real WZ_GEV    = 2.441404;
  localparam real ALPHA     = 1.0 / 132.507;
  localparam real SW2       = 0.22224648578577766;

  function automatic real rabs(real v);
    return (v < 0.0) ? -v : v;
  endfunction

  function automatic real fx2r(longint raw, int frac);
    return real'(raw) / real'(64'sd1 << frac);
  endfunction

  function automatic longint r2fx(real v, int frac);
    return longint'($floor(v * real'(64'sd1 << frac) + 0.5));
  endfunction

  // ---------------------------------------------------------------- e+e-
  // Final-state mu- momentum (GeV) for random numbers rt, rp in [0,1).
  function automatic void rambo_ref(real rt, real rp, output real p3 [4]);
    real c, s, ph;
    c  = 2.0 * rt - 1.0;
    s  = $sqrt(1.0 - c * c);
    ph = 2.0 * PI * rp;
    p3[0] = EBEAM_GEV;
    p3[1] = EBEAM_GEV * s * $cos(ph);
    p3[2] = EBEAM_GEV * s * $sin(ph);
    p3[3] = EBEAM_GEV * c;
  endfunction

  // |M|^2 of e+e- -> gamma/Z -> mu+mu-, massless leptons, summed over
  // helicities and averaged over the initial ones, for cos(theta) of the mu-.
  function automatic real me_ref(real cth);
    real e2, sw, cw, gl, gr, s, dre, dim, den, sum;
    real g[2];
    e2 = 4.0 * PI * ALPHA;
    sw = $sqrt(SW2); cw = $sqrt(1.0 - SW2);
    gl = (-0.5 + SW2) / (sw * cw);
    gr = SW2 / (sw * cw);
    g[0] = gl; g[1] = gr;
    s   = 4.0 * EBEAM_GEV * EBEAM_GEV;
    dre = s - MZ_GEV * MZ_GEV;
    dim = MZ_GEV * WZ_GEV;
    den = dre * dre + dim * dim;
    sum = 0.0;
    for (int he = 0; he < 2; he++)
      for (int hm = 0; hm < 2; hm++) begin
        real k, are, aim, gg;
        k   = (he == hm) ? (1.0 + cth) : (1.0 - cth);
        gg  = g[he] * g[hm];
        // A = e^2 (1 +- c) [1 + gg s / (s - MZ^2 + i MZ WZ)]
        are = e2 * k * (1.0 + gg * s * dre / den);
        aim = e2 * k * (-gg * s * dim / den);
        sum += are * are + aim * aim;
      end
    return sum / 4.0;
  endfunction

  // ---------------------------------------------------------------- colour
  // Permutation number p (lexicographic order) of 0..n-1.
  function automatic void perm(int n, int p, output int out [5]);
    int pool [5];
    int f, cnt;
    for (int i = 0; i < 5; i++) begin pool[i] = i; out[i] = 0; end
    cnt = n;
    for (int i = 0; i < n; i++) begin
      int q;
      f = 1;
      for (int j = 1; j < n - i; j++) f *= j;
      q = p / f;
      p = p % f;
      out[i] = pool[q];
      for (int j = q; j < cnt - 1; j++) pool[j] = pool[j+1];
      cnt--;
    end
  endfunction

  function automatic int uf_find(ref int par [10], input int x);
    while (par[x] != x) x = par[x];
    return x;
  endfunction

  // C(sigma, tau) = Tr( T^s1..T^sn T^tn..T^t1 ) summed over gluon colours,
  // for SU(3) with Tr(T^a T^b) = delta/2, evaluated by expanding every
  // gluon with the Fierz identity and counting closed index loops.
  function automatic real color_entry(int n, int ps, int pt);
    int s [5];
    int t [5];
    int word [10];
    int pos [5][2];
    int seen [5];
    real total;
    perm(n, ps, s);
    perm(n, pt, t);
    for (int i = 0; i < n; i++) begin
      word[i] = s[i];
      word[2*n-1-i] = t[i];
    end
    for (int i = 0; i < 5; i++) seen[i] = 0;
    for (int p = 0; p < 2*n; p++) begin
      pos[word[p]][seen[word[p]]] = p;
      seen[word[p]]++;
    end
    total = 0.0;
    for (int mask = 0; mask < (1 << n); mask++) begin
      int par [10];
      int comps;
      real w;
      for (int i = 0; i < 10; i++) par[i] = i;
      w = 1.0;
      for (int g = 0; g < n; g++) begin
        int p, q, a, b, c, d;
        p = pos[g][0]; q = pos[g][1];
        if ((mask >> g) & 1) begin
          // -1/(2N) delta(r_p, c_p) delta(r_q, c_q)
          a = p; b = (p + 1) % (2*n); c = q; d = (q + 1) % (2*n);
          w = w * (-1.0 / 6.0);
        end else begin
          // 1/2 delta(r_p, c_q) delta(r_q, c_p)
          a = p; b = (q + 1) % (2*n); c = q; d = (p + 1) % (2*n);
          w = w * 0.5;
        end
        par[uf_find(par, a)] = uf_find(par, b);
        par[uf_find(par, c)] = uf_find(par, d);
      end
      comps = 0;
      for (int i = 0; i < 2*n; i++) if (uf_find(par, i) == i) comps++;
      total += w * (3.0 ** comps);
    end
    return total;
  endfunction

  // Number of gluons of gg -> ttbar + jets with a colour basis of ncolor flows.
  function automatic int n_gluons(int ncolor);
    int f, n;
    f = 1; n = 1;
    while (f < ncolor) begin n++; f *= n; end
    return n;
  endfunction

  // Normalised coefficient C'_ij (j >= i): C_ii, or 2 C_ij off the diagonal,
  // rounded to ap_fixed<24,7>.
  function automatic longint coef_q(int ng, int i, int j);
    real v;
    v = color_entry(ng, i, j) * ((i == j) ? 1.0 : 2.0);
    return r2fx(v, 17);
  endfunction

  function automatic longint wrap(longint x, int bits);
    longint m;
    m = x & ((64'sd1 <<< bits) - 1);
    if (m >= (64'sd1 <<< (bits - 1))) m = m - (64'sd1 <<< bits);
    return m;
  endfunction

  // Bit-exact model of the folded fixed-point colour contraction:
  // row sums exact, cast to ap_fixed<22,10>; row terms cast to
  // ap_fixed<28,15>; sum wraps at 28 bits. Returns the raw accumulator.
  function automatic longint color_fixed(int n, ref longint cq [$], ref longint re [$],
                                         ref longint im [$]);
    longint acc;
    int t;
    acc = 0;
    t = 0;
    for (int i = 0; i < n; i++) begin
      longint sre, sim, rre, rim, term;
      sre = 0; sim = 0;
      for (int j = i; j < n; j++) begin
        sre += cq[t] * re[j];
        sim += cq[t] * im[j];
        t++;
      end
      rre  = wrap(sre >>> 17, 22);
      rim  = wrap(sim >>> 17, 22);
      term = re[i] * rre + im[i] * rim;
      acc  = wrap(acc + wrap(term >>> 11, 28), 28);
    end
    return acc;
  endfunction

  // Real-valued double sum sum_ij C_ij (Re A_i Re A_j + Im A_i Im A_j) with
  // the exact colour matrix, for amplitude raws with 12 fractional bits.
  function automatic real color_real(int n, ref real cm [$], ref longint re [$],
                                     ref longint im [$]);
    real s;
    s = 0.0;
    for (int i = 0; i < n; i++)
      for (int j = 0; j < n; j++)
        s += cm[i*n + j] * (fx2r(re[i], 12) * fx2r(re[j], 12) + fx2r(im[i], 12) * fx2r(im[j], 12));
    return s;
  endfunction

endpackage
