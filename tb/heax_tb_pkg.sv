// heax_tb_pkg: reference arithmetic for the HEAX testbenches, written
// independently of the RTL: modular arithmetic on 128-bit integers, prime and
// root-of-unity search, twiddle tables, and plain software NTT/INTT, Barrett
// and Shoup constants, and the RNS key-switch reference.
package heax_tb_pkg;
  localparam int unsigned W = 54;
  typedef logic [63:0]  u64;
  typedef logic [127:0] u128;

  function automatic u64 mulmod(u64 a, u64 b, u64 p);
    u128 t;
    t = u128'(a) * u128'(b);
    return u64'(t % u128'(p));
  endfunction

  function automatic u64 addmod(u64 a, u64 b, u64 p);
    return u64'((u128'(a) + u128'(b)) % u128'(p));
  endfunction

  function automatic u64 submod(u64 a, u64 b, u64 p);
    return u64'((u128'(a) + u128'(p) - u128'(b % p)) % u128'(p));
  endfunction

  function automatic u64 powmod(u64 a, u64 e, u64 p);
    u64 r, b;
    r = 1; b = a % p;
    while (e != 0) begin
      if (e[0]) r = mulmod(r, b, p);
      b = mulmod(b, b, p);
      e = e >> 1;
    end
    return r;
  endfunction

  function automatic u64 invmod(u64 a, u64 p);   // p prime
    return powmod(a, p - 2, p);
  endfunction

  function automatic bit is_prime(u64 n);
    u64 d, x;
    int s;
    u64 bases[12] = '{2, 3, 5, 7, 11, 13, 17, 19, 23, 29, 31, 37};
    if (n < 2) return 0;
    foreach (bases[i]) begin
      if (n == bases[i]) return 1;
      if (n % bases[i] == 0) return 0;
    end
    d = n - 1; s = 0;
    while (!d[0]) begin d = d >> 1; s++; end
    foreach (bases[i]) begin
      bit comp;
      x = powmod(bases[i], d, n);
      if (x == 1 || x == n - 1) continue;
      comp = 1;
      for (int r = 1; r < s; r++) begin
        x = mulmod(x, x, n);
        if (x == n - 1) begin comp = 0; break; end
      end
      if (comp) return 0;
    end
    return 1;
  endfunction

  // The idx-th largest prime below 2^bits that is 1 mod 2n.
  function automatic u64 find_prime(int bits, int n, int idx);
    u64 c;
    int found;
    found = 0;
    c = ((u64'(1) << bits) - 1) / u64'(2*n) * u64'(2*n) + 1;
    while (1) begin
      if (c < (u64'(1) << bits) && is_prime(c)) begin
        if (found == idx) return c;
        found++;
      end
      c = c - u64'(2*n);
    end
  endfunction

  // A primitive 2n-th root of unity mod p (psi^n = -1).
  function automatic u64 find_psi(u64 p, int n);
    u64 g, psi;
    for (g = 2; g < 1000; g++) begin
      psi = powmod(g, (p - 1) / u64'(2*n), p);
      if (powmod(psi, u64'(n), p) == p - 1) return psi;
    end
    return 0;
  endfunction

  function automatic int bitrev(int x, int bits);
    int r;
    r = 0;
    for (int i = 0; i < bits; i++) r = (r << 1) | ((x >> i) & 1);
    return r;
  endfunction

  function automatic int clog2(int n);
    int r;
    r = 0;
    while ((1 << r) < n) r++;
    return r;
  endfunction

  // Shoup companion floor(y * 2^W / p)
  function automatic u64 shoup(u64 y, u64 p);
    return u64'((u128'(y) << W) / u128'(p));
  endfunction

  // Barrett constant floor(2^(2W) / p), returned as {high word, low word}
  function automatic u128 barrett_u(u64 p);
    return (u128'(1) << (2*W)) / u128'(p);
  endfunction

  // Twiddle table entry k: psi^bitrev(k) (forward) or psi^-bitrev(k) / 2 (inverse)
  function automatic u64 twiddle(u64 p, u64 psi, int n, int k, bit inverse);
    u64 w;
    w = powmod(psi, u64'(bitrev(k, clog2(n))), p);
    if (inverse) w = mulmod(invmod(w, p), invmod(2, p), p);
    return w;
  endfunction

  // Reference negacyclic NTT, Algorithm 3 of the paper (output bit-reversed)
  task automatic ref_ntt(ref u64 a[], input u64 p, input u64 psi);
    int n, t;
    u64 u, v, w;
    n = a.size();
    for (int m = 1; m < n; m = 2*m) begin
      t = n / (2*m);
      for (int i = 0; i < m; i++) begin
        w = powmod(psi, u64'(bitrev(m + i, clog2(n))), p);
        for (int j = 2*i*t; j < 2*i*t + t; j++) begin
          u = a[j];
          v = mulmod(a[j+t], w, p);
          a[j]   = addmod(u, v, p);
          a[j+t] = submod(u, v, p);
        end
      end
    end
  endtask

  // Direct O(n^2) negacyclic NTT in bit-reversed order:
  // X[k] = sum_i a_i psi^((2 bitrev(k) + 1) i), the evaluation of a at the
  // odd power psi^(2 bitrev(k) + 1).
  task automatic ref_ntt_direct(ref u64 a[], input u64 p, input u64 psi);
    int n, lg;
    u64 res[], acc, e;
    n = a.size(); lg = clog2(n);
    res = new[n];
    for (int k = 0; k < n; k++) begin
      acc = 0;
      e = powmod(psi, u64'(2*bitrev(k, lg) + 1), p);
      for (int i = n - 1; i >= 0; i--) acc = addmod(mulmod(acc, e, p), a[i], p);
      res[k] = acc;
    end
    a = res;
  endtask

  // Direct O(n^2) inverse of ref_ntt_direct:
  // a_i = n^-1 sum_k X[k] psi^-((2 bitrev(k) + 1) i)
  task automatic ref_intt_direct(ref u64 x[], input u64 p, input u64 psi);
    int n, lg;
    u64 res[], ninv, pinv, acc;
    n = x.size(); lg = clog2(n);
    res = new[n];
    ninv = invmod(u64'(n), p);
    pinv = invmod(psi, p);
    for (int i = 0; i < n; i++) begin
      acc = 0;
      for (int k = 0; k < n; k++)
        acc = addmod(acc, mulmod(x[k], powmod(pinv, u64'(((2*bitrev(k, lg) + 1) * i) % (2*n)), p), p), p);
      res[i] = mulmod(acc, ninv, p);
    end
    x = res;
  endtask
endpackage
