// fhe_ref_pkg: plain software reference arithmetic for the testbenches.
// Everything here is written independently of the RTL: modular arithmetic
// with the % operator on 128-bit values, the textbook iterative NTT/INTT
// (Cooley-Tukey forward, Gentleman-Sande inverse, twiddles in bit-reversed
// order), schoolbook negacyclic multiplication, digit decomposition and the
// X -> X^k substitution.
package fhe_ref_pkg;
  typedef longint unsigned u64;
  typedef u64 poly_t [];

  function automatic u64 mulm(u64 a, u64 b, u64 q);
    logic [127:0] p;
    p = 128'(a) * 128'(b);
    return u64'(p % 128'(q));
  endfunction
  function automatic u64 addm(u64 a, u64 b, u64 q);
    return u64'((128'(a) + 128'(b)) % 128'(q));
  endfunction
  function automatic u64 subm(u64 a, u64 b, u64 q);
    return u64'((128'(a) + 128'(q) - 128'(b)) % 128'(q));
  endfunction
  function automatic u64 powm(u64 a, u64 e, u64 q);
    u64 r = 1;
    while (e != 0) begin
      if (e[0]) r = mulm(r, a, q);
      a = mulm(a, a, q);
      e = e >> 1;
    end
    return r;
  endfunction
  function automatic u64 invm(u64 a, u64 q);   // q prime
    return powm(a, q - 2, q);
  endfunction
  function automatic int unsigned bitlen(u64 q);
    int unsigned k = 0;
    while (q != 0) begin k++; q = q >> 1; end
    return k;
  endfunction
  function automatic logic [55:0] barrett_mu(u64 q);
    logic [127:0] one;
    one = 128'd1 << (2 * bitlen(q));
    return 56'(one / 128'(q));
  endfunction
  // primitive 2N-th root of unity (q prime, q = 1 mod 2N)
  function automatic u64 find_psi(u64 q, int unsigned n);
    for (u64 g = 2; g < 1000; g++) begin
      u64 p = powm(g, (q - 1) / (2 * n), q);
      if (powm(p, n, q) == q - 1) return p;
    end
    return 0;
  endfunction
  function automatic int unsigned bitrev(int unsigned x, int unsigned bits);
    int unsigned r = 0;
    for (int unsigned i = 0; i < bits; i++) r |= ((x >> i) & 1) << (bits - 1 - i);
    return r;
  endfunction
  // TF[i] = w^bitrev(i), w = psi (forward) or psi^-1 (inverse)
  function automatic poly_t make_tf(u64 w, int unsigned logn, u64 q);
    poly_t t = new[1 << logn];
    for (int unsigned i = 0; i < (1 << logn); i++) t[i] = powm(w, bitrev(i, logn), q);
    return t;
  endfunction
  function automatic poly_t ntt(poly_t a, poly_t tf, u64 q);
    int unsigned n = a.size();
    int unsigned t = n;
    poly_t r = a;
    for (int unsigned m = 1; m < n; m = 2 * m) begin
      t = t / 2;
      for (int unsigned i = 0; i < m; i++) begin
        int unsigned j1 = 2 * i * t;
        u64 s = tf[m + i];
        for (int unsigned j = j1; j < j1 + t; j++) begin
          u64 u = r[j];
          u64 v = mulm(r[j + t], s, q);
          r[j] = addm(u, v, q);
          r[j + t] = subm(u, v, q);
        end
      end
    end
    return r;
  endfunction
  function automatic poly_t intt(poly_t a, poly_t tfi, u64 q);
    int unsigned n = a.size();
    int unsigned t = 1;
    poly_t r = a;
    u64 ninv = invm(u64'(n), q);
    for (int unsigned m = n; m > 1; m = m / 2) begin
      int unsigned j1 = 0;
      int unsigned h = m / 2;
      for (int unsigned i = 0; i < h; i++) begin
        u64 s = tfi[h + i];
        for (int unsigned j = j1; j < j1 + t; j++) begin
          u64 u = r[j];
          u64 v = r[j + t];
          r[j] = addm(u, v, q);
          r[j + t] = mulm(subm(u, v, q), s, q);
        end
        j1 = j1 + 2 * t;
      end
      t = 2 * t;
    end
    foreach (r[j]) r[j] = mulm(r[j], ninv, q);
    return r;
  endfunction
  function automatic poly_t negacyclic_mul(poly_t a, poly_t b, u64 q);
    int unsigned n = a.size();
    poly_t r = new[n];
    foreach (r[i]) r[i] = 0;
    for (int unsigned i = 0; i < n; i++)
      for (int unsigned j = 0; j < n; j++) begin
        u64 p = mulm(a[i], b[j], q);
        if (i + j < n) r[i + j] = addm(r[i + j], p, q);
        else           r[i + j - n] = subm(r[i + j - n], p, q);
      end
    return r;
  endfunction
  function automatic poly_t pw_mul(poly_t a, poly_t b, u64 q);
    poly_t r = new[a.size()];
    foreach (r[i]) r[i] = mulm(a[i], b[i], q);
    return r;
  endfunction
  function automatic poly_t pw_add(poly_t a, poly_t b, u64 q);
    poly_t r = new[a.size()];
    foreach (r[i]) r[i] = addm(a[i], b[i], q);
    return r;
  endfunction
  function automatic poly_t pw_sub(poly_t a, poly_t b, u64 q);
    poly_t r = new[a.size()];
    foreach (r[i]) r[i] = subm(a[i], b[i], q);
    return r;
  endfunction
  function automatic poly_t digit(poly_t a, int unsigned d, int unsigned bits);
    poly_t r = new[a.size()];
    foreach (r[i]) r[i] = (a[i] >> (d * bits)) & ((u64'(1) << bits) - 1);
    return r;
  endfunction
  // m(X) -> m(X^k) in Z_q[X]/(X^N+1), k odd
  function automatic poly_t subs(poly_t a, int unsigned k, u64 q);
    int unsigned n = a.size();
    poly_t r = new[n];
    for (int unsigned i = 0; i < n; i++) begin
      int unsigned e = (i * k) % (2 * n);
      if (e < n) r[e] = a[i];
      else       r[e - n] = subm(0, a[i], q);
    end
    return r;
  endfunction
  function automatic poly_t rand_poly(int unsigned n, u64 q);
    poly_t r = new[n];
    foreach (r[i]) r[i] = {$urandom, $urandom} % q;
    return r;
  endfunction
endpackage
