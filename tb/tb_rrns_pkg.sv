// tb_rrns_pkg: reference arithmetic for the RRNS testbenches.
//
// Plain binary big-integer arithmetic, independent of the table datapath:
// modular inverse (extended Euclid), Miller-Rabin primality, the residue
// vector of an integer and its CRT reconstruction over the 19 bottom moduli,
// the constants of the bottom-layer Montgomery reduction for a middle-layer
// modulus, and a reference model of that reduction. Middle-layer values fit
// in 160 bits (the bottom dynamic range is about 2^145); top-layer values
// use big_t.
package tb_rrns_pkg;
  import rrns_pkg::*;

  typedef logic [159:0]  w_t;     // middle-layer integers
  typedef logic [4095:0] big_t;   // top-layer integers

  function automatic w_t mulmod(w_t a, w_t b, w_t n);
    logic [319:0] p;
    p = 320'(a) * 320'(b);
    return w_t'(p % 320'(n));
  endfunction

  function automatic w_t powmod(w_t a, w_t e, w_t n);
    w_t r = 1;
    w_t x = a % n;
    while (e != 0) begin
      if (e[0]) r = mulmod(r, x, n);
      x = mulmod(x, x, n);
      e = e >> 1;
    end
    return r % n;
  endfunction

  // a^-1 mod n, gcd(a, n) = 1
  function automatic w_t inv_mod(w_t a, w_t n);
    w_t t = 0, nt = 1, r = n, nr = a % n, q, tmp;
    while (nr != 0) begin
      q   = r / nr;
      tmp = nt;
      nt  = (t + n - mulmod(q % n, nt, n)) % n;
      t   = tmp;
      tmp = nr;
      nr  = r - q * nr;
      r   = tmp;
    end
    return t;
  endfunction

  function automatic bit is_prime(w_t n);
    int unsigned bases [12] = '{2, 3, 5, 7, 11, 13, 17, 19, 23, 29, 31, 37};
    w_t d;
    int unsigned r;
    if (n < 2) return 0;
    foreach (bases[b]) begin
      if (n == w_t'(bases[b])) return 1;
      if (n % w_t'(bases[b]) == 0) return 0;
    end
    d = n - 1;
    r = 0;
    while (!d[0]) begin
      d = d >> 1;
      r++;
    end
    foreach (bases[b]) begin
      w_t x;
      bit comp;
      x = powmod(w_t'(bases[b]), d, n);
      if (x == 1 || x == n - 1) continue;
      comp = 1;
      for (int unsigned k = 1; k < r; k++) begin
        x = mulmod(x, x, n);
        if (x == n - 1) begin
          comp = 0;
          break;
        end
      end
      if (comp) return 0;
    end
    return 1;
  endfunction

  function automatic w_t bmod(int unsigned s);
    return w_t'(BOTTOM_MOD[s]);
  endfunction

  function automatic w_t left_prod();
    w_t p = 1;
    for (int unsigned s = 1; s <= K1; s++) p = p * bmod(s);
    return p;
  endfunction

  function automatic w_t right_prod();
    w_t p = 1;
    for (int unsigned s = K1 + 1; s < NLANE; s++) p = p * bmod(s);
    return p;
  endfunction

  function automatic w_t full_prod();
    return bmod(0) * left_prod() * right_prod();
  endfunction

  function automatic vec_t to_vec(w_t x);
    vec_t v;
    for (int unsigned s = 0; s < NLANE; s++) v[s] = res_t'(x % bmod(s));
    return v;
  endfunction

  function automatic vec_t big_to_vec(big_t x);
    vec_t v;
    for (int unsigned s = 0; s < NLANE; s++) v[s] = res_t'(x % big_t'(bmod(s)));
    return v;
  endfunction

  // CRT: the integer in [0, D1) with the given bottom residues
  function automatic w_t from_vec(vec_t v);
    w_t d1 = full_prod();
    w_t acc = 0;
    for (int unsigned s = 0; s < NLANE; s++) begin
      w_t ds = d1 / bmod(s);
      w_t c  = mulmod(w_t'(v[s]), inv_mod(ds % bmod(s), bmod(s)), bmod(s));
      acc = (acc + mulmod(c, ds, d1)) % d1;
    end
    return acc;
  endfunction

  // constants of the bottom-layer reduction modulo ms, slot by slot
  function automatic void l1_consts(w_t ms, output vec_t c [L1_SLOTS]);
    w_t m  = left_prod();
    w_t mp = right_prod();
    for (int unsigned t = 0; t < L1_SLOTS; t++) c[t] = '0;
    for (int unsigned s = 0; s < NLANE; s++) begin
      w_t q = bmod(s);
      if (s == 0) begin
        c[0][s] = res_t'(inv_mod(m % q, q));
        for (int unsigned i = 1; i <= K1; i++)
          c[i][s] = res_t'(mulmod(ms % q, inv_mod(bmod(i) % q, q), q));
        c[K1 + 1][s] = res_t'(inv_mod(q - (mp % q), q));
        for (int unsigned j = 1; j <= L1; j++)
          c[K1 + 1 + j][s] = res_t'(inv_mod(bmod(K1 + j) % q, q));
      end else if (lane_is_left(s)) begin
        c[0][s] = res_t'(mulmod(q - inv_mod(ms % q, q),
                                inv_mod((m / q) % q, q), q));
        for (int unsigned j = 1; j <= L1; j++)
          c[K1 + 1 + j][s] = res_t'((mp / bmod(K1 + j)) % q);
        c[K1 + L1 + 2][s] = res_t'((q - (mp % q)) % q);
      end else begin
        c[0][s] = res_t'(inv_mod(m % q, q));
        for (int unsigned i = 1; i <= K1; i++)
          c[i][s] = res_t'(mulmod(inv_mod(bmod(i) % q, q), ms % q, q));
        c[K1 + 1][s] = res_t'(inv_mod((mp / q) % q, q));
      end
    end
  endfunction

  // Reference Montgomery reduction: z = (h + u*ms)/m with
  // u = sum_i mu_i*(m/m_i), mu_i = -h*ms^-1*(m/m_i)^-1 mod m_i.
  function automatic w_t ref_reduce(w_t h, w_t ms);
    w_t m = left_prod();
    w_t u = 0;
    for (int unsigned i = 1; i <= K1; i++) begin
      w_t q  = bmod(i);
      w_t mi = (m / q) % q;
      w_t mu = mulmod(h % q, mulmod(q - inv_mod(ms % q, q), inv_mod(mi, q), q), q);
      u = u + mu * (m / q);
    end
    return (h + u * ms) / m;
  endfunction

  // the largest n primes below bound that are coprime to every bottom modulus
  function automatic void primes_below(w_t bound, int unsigned n, output w_t p []);
    w_t c = bound - 1;
    p = new[n];
    if (!c[0]) c = c - 1;
    for (int unsigned k = 0; k < n; k++) begin
      while (!is_prime(c)) c = c - 2;
      p[k] = c;
      c = c - 2;
    end
  endfunction

endpackage
