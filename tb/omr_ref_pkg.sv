// omr_ref_pkg: reference arithmetic for the testbenches, written independently
// of the RTL: modular arithmetic on 128-bit intermediates, transforms by direct
// evaluation (no butterflies), negacyclic convolution by schoolbook
// multiplication, and whole-operation models of Rot and of the MatMul schedule.
package omr_ref_pkg;
  import omr_pkg::*;

  typedef longint unsigned u64;
  typedef u64 vec_t[];

  // 60-bit NTT-friendly primes (each = 1 mod 2^17); the tests use the first L
  // as ciphertext moduli and the next one as the special modulus p.
  localparam u64 PRIMES [6] = '{64'h0ffffffffffc0001, 64'h0fffffffff840001, 64'h0fffffffff6a0001,
                                 64'h0fffffffff5a0001, 64'h0fffffffff2a0001, 64'h0fffffffff240001};

  function automatic u64 mulmod(u64 a, u64 b, u64 q);
    logic [127:0] x;
    x = 128'(a) * 128'(b);
    return u64'(x % 128'(q));
  endfunction
  function automatic u64 addmod(u64 a, u64 b, u64 q);
    return u64'((128'(a) + 128'(b)) % 128'(q));
  endfunction
  function automatic u64 submod(u64 a, u64 b, u64 q);
    return u64'((128'(a) + 128'(q) - 128'(b % q)) % 128'(q));
  endfunction
  function automatic u64 powmod(u64 b, u64 e, u64 q);
    u64 r = 1;
    b = b % q;
    while (e != 0) begin
      if (e[0]) r = mulmod(r, b, q);
      b = mulmod(b, b, q);
      e = e >> 1;
    end
    return r;
  endfunction
  function automatic u64 invmod(u64 a, u64 q);
    return powmod(a, q - 2, q);
  endfunction
  function automatic logic [MU_W-1:0] barrett_mu(u64 q);
    logic [127:0] one = 128'd1;
    return MU_W'((one << 120) / 128'(q));
  endfunction
  function automatic int brv(int x, int logn);
    int r = 0;
    for (int i = 0; i < logn; i++) if (x & (1 << i)) r |= 1 << (logn - 1 - i);
    return r;
  endfunction
  function automatic int clog2(int n);
    int r = 0;
    while ((1 << r) < n) r++;
    return r;
  endfunction
  // primitive 2n-th root of unity
  function automatic u64 find_psi(u64 q, int n);
    for (u64 g = 2; g < 1000; g++) begin
      u64 psi = powmod(g, (q - 1) / u64'(2 * n), q);
      if (powmod(psi, u64'(n), q) == q - 1) return psi;
    end
    return 0;
  endfunction

  function automatic mod_cfg_t make_cfg(u64 q, u64 p, int n);
    mod_cfg_t c;
    c.q     = W'(q);
    c.mu    = barrett_mu(q);
    c.ninv  = W'(invmod(u64'(n) % q, q));
    c.pinv  = W'(invmod(p % q, q));
    c.phalf = W'((p >> 1) % q);
    return c;
  endfunction

  // forward transform in the hardware's output order:
  // A[k] = sum_m a[m] * psi^((2*brv(k)+1)*m)
  function automatic vec_t ntt_ref(vec_t a, u64 q, u64 psi);
    int n = a.size();
    int lg = clog2(n);
    vec_t r = new[n];
    for (int k = 0; k < n; k++) begin
      u64 w = powmod(psi, u64'(2 * brv(k, lg) + 1), q);
      u64 acc = 0, wp = 1;
      for (int m = 0; m < n; m++) begin
        acc = addmod(acc, mulmod(a[m], wp, q), q);
        wp = mulmod(wp, w, q);
      end
      r[k] = acc;
    end
    return r;
  endfunction

  function automatic vec_t tf_table(u64 q, u64 psi, int n, bit inverse);
    int lg = clog2(n);
    vec_t r = new[n];
    u64 base = inverse ? invmod(psi, q) : psi;
    for (int k = 0; k < n; k++) r[k] = powmod(base, u64'(brv(k, lg)), q);
    return r;
  endfunction

  // a * b mod (X^n + 1, q)
  function automatic vec_t negacyclic(vec_t a, vec_t b, u64 q);
    int n = a.size();
    vec_t r = new[n];
    foreach (r[i]) r[i] = 0;
    for (int i = 0; i < n; i++)
      for (int j = 0; j < n; j++) begin
        u64 pr = mulmod(a[i], b[j], q);
        if (i + j < n) r[i + j] = addmod(r[i + j], pr, q);
        else           r[i + j - n] = submod(r[i + j - n], pr, q);
      end
    return r;
  endfunction

  // X -> X^g
  function automatic vec_t galois_ref(vec_t a, int g, u64 q);
    int n = a.size();
    vec_t r = new[n];
    for (int i = 0; i < n; i++) begin
      int e = (i * g) % (2 * n);
      if (e < n) r[e] = a[i];
      else       r[e - n] = (a[i] == 0) ? 0 : q - a[i];
    end
    return r;
  endfunction

  // Flat layouts used by the models:
  //   ciphertext residue (poly o, limb l, coefficient x) at (o*L + l)*n + x
  //   rotation key in coefficient form (tt, j, poly o, x) at ((tt*L + j)*2 + o)*n + x,
  //   tt = 0 for the special modulus p, tt = i+1 for q_i.
  function automatic vec_t slice(vec_t v, int off, int n);
    vec_t r = new[n];
    for (int x = 0; x < n; x++) r[x] = v[off + x];
    return r;
  endfunction

  // Rot: automorphism X -> X^g, then key switching with one special modulus.
  function automatic vec_t rot_ref(vec_t ct, vec_t key, vec_t qs, u64 p, int g, int n);
    int L = qs.size();
    vec_t res = new[2 * L * n];
    vec_t c0 = new[L * n];
    vec_t c1 = new[L * n];
    vec_t ap = new[2 * n];
    for (int l = 0; l < L; l++) begin
      vec_t t0, t1;
      t0 = galois_ref(slice(ct, l * n, n), g, qs[l]);
      t1 = galois_ref(slice(ct, (L + l) * n, n), g, qs[l]);
      for (int x = 0; x < n; x++) begin c0[l * n + x] = t0[x]; c1[l * n + x] = t1[x]; end
    end
    for (int tt = 0; tt <= L; tt++) begin
      u64 qt;
      vec_t acc = new[2 * n];
      qt = (tt == 0) ? p : qs[tt - 1];
      foreach (acc[x]) acc[x] = 0;
      for (int j = 0; j < L; j++) begin
        vec_t cj = new[n];
        foreach (cj[x]) cj[x] = c1[j * n + x] % qt;
        for (int o = 0; o < 2; o++) begin
          vec_t pr;
          pr = negacyclic(cj, slice(key, ((tt * L + j) * 2 + o) * n, n), qt);
          for (int x = 0; x < n; x++) acc[o * n + x] = addmod(acc[o * n + x], pr[x], qt);
        end
      end
      for (int o = 0; o < 2; o++) begin
        for (int x = 0; x < n; x++) begin
          if (tt == 0) ap[o * n + x] = addmod(acc[o * n + x], p >> 1, p);
          else begin
            u64 y, r, pinv;
            pinv = invmod(p % qt, qt);
            y = submod(ap[o * n + x] % qt, (p >> 1) % qt, qt);
            r = mulmod(submod(acc[o * n + x], y, qt), pinv, qt);
            if (o == 0) r = addmod(r, c0[(tt - 1) * n + x], qt);
            res[(o * L + tt - 1) * n + x] = r;
          end
        end
      end
    end
    return res;
  endfunction
endpackage
