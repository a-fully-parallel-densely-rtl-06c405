// pimi_ref_pkg: bit-level reference model of the PIMI arithmetic, written
// independently of the RTL for the testbenches.
//
// Values are fixed-point integers (value = v / 2^F) held in longint.
// Products are truncated toward zero, all results saturate to W bits, and
// the tanh table is derived with real arithmetic from its definition:
// L equal bins on [-1, 1), level k = -1 + 2k/(L-1), truncated toward zero.
package pimi_ref_pkg;

  function automatic longint sat(input longint v, input int W);
    longint hi, lo;
    hi = (longint'(1) << (W - 1)) - 1;
    lo = -(longint'(1) << (W - 1));
    return (v > hi) ? hi : ((v < lo) ? lo : v);
  endfunction

  function automatic longint mul(input longint a, input longint b, input int W, input int F);
    longint p, q;
    p = a * b;
    q = (p >= 0) ? (p / (longint'(1) << F)) : -((-p) / (longint'(1) << F));
    return sat(q, W);
  endfunction

  function automatic longint add(input longint a, input longint b, input int W);
    return sat(a + b, W);
  endfunction

  function automatic longint tanh_q(input longint x, input int F, input int L);
    real xr, lv;
    int  k;
    xr = real'(x) / real'(longint'(1) << F);
    if (xr < -1.0) return -(longint'(1) << F);
    if (xr >= 1.0) return (longint'(1) << F);
    k = $floor((xr + 1.0) * real'(L) / 2.0);
    lv = (-1.0 + 2.0 * real'(k) / real'(L - 1)) * real'(longint'(1) << F);
    return longint'($rtoi(lv));
  endfunction

  // One spin update: returns 1 for +1, 0 for -1.
  function automatic bit update(input longint field, input bit s, input longint noise,
                                input longint beta, input longint eta, input longint xi,
                                input int W, input int F, input int L);
    longint d;
    d = add(tanh_q(mul(beta, field, W, F), F, L), s ? xi : sat(-xi, W), W);
    d = add(d, mul(eta, noise, W, F), W);
    return (d >= 0);
  endfunction

  // Largest problem the whole-run model below holds.
  localparam int MAXN = 64;
  localparam int MAXM = 32;
  typedef longint  jmat_t [MAXN][MAXN];
  typedef longint  vec_t  [MAXN];
  typedef bit      spins_t [MAXM][MAXN];

  // Local field of spin i of trial a: exact sum plus bias, saturated once.
  function automatic longint field(input jmat_t J, input vec_t h, input spins_t s,
                                   input int a, input int i, input int n, input int W);
    longint acc;
    acc = h[i];
    for (int j = 0; j < n; j++) acc += s[a][j] ? J[i][j] : -J[i][j];
    return sat(acc, W);
  endfunction

  // One fully parallel PIMI update step of trials 0..m-1.
  function automatic void pimi_step(input jmat_t J, input vec_t h, inout spins_t s,
                                    input vec_t noise, input longint beta, input longint eta,
                                    input longint xi, input int n, input int m,
                                    input int W, input int F, input int L);
    spins_t nxt;
    nxt = s;
    for (int a = 0; a < m; a++)
      for (int i = 0; i < n; i++)
        nxt[a][i] = update(field(J, h, s, a, i, n, W), s[a][i], noise[i], beta, eta, xi, W, F, L);
    s = nxt;
  endfunction

  // Ising energy E = -sum_{i<j} J_ij s_i s_j - sum_i h_i s_i (in units of 2^-F).
  function automatic longint energy(input jmat_t J, input vec_t h, input spins_t s,
                                    input int a, input int n);
    longint e;
    e = 0;
    for (int i = 0; i < n; i++) begin
      e -= s[a][i] ? h[i] : -h[i];
      for (int j = i + 1; j < n; j++)
        e -= (s[a][i] == s[a][j]) ? J[i][j] : -J[i][j];
    end
    return e;
  endfunction

  // Approximate standard-normal sample (sum of 12 uniforms minus 6).
  function automatic real gauss();
    real acc;
    acc = 0.0;
    for (int k = 0; k < 12; k++) acc += real'($urandom_range(0, 1000000)) / 1000000.0;
    return acc - 6.0;
  endfunction

  // Real value to fixed point, truncated toward zero and saturated.
  function automatic longint to_q(input real v, input int W, input int F);
    return sat(longint'($rtoi(v * real'(longint'(1) << F))), W);
  endfunction

endpackage
