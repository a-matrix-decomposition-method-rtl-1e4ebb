// gnb_pkg -- elaboration-time arithmetic for odd-type Gaussian normal basis
// (GNB) multipliers over GF(2^k).
//
// A type-T GNB of GF(2^k) exists when p = T*k + 1 is prime and, with s the
// order of 2 modulo p, gcd(T*k/s, k) = 1. Taking lambda of multiplicative
// order T modulo p, basis element beta_i is the Gauss period
//     beta_i = sum_{t=0}^{T-1} gamma^(2^i * lambda^t mod p)
// for a primitive p-th root of unity gamma. These functions derive, at
// elaboration time, the multiplication matrices M_l (a*b = sum_l c_l beta_l
// with c_l = a^T M_l b) from that definition, so that the hardware modules
// can pick their XOR inputs from them. Nothing here becomes logic.
//
// coef(l,i,j): coefficient of beta_l in beta_i*beta_j. Expanding the product
// gives T^2 powers gamma^e with e = 2^i lambda^s + 2^j lambda^t (mod p). The
// powers with e in the coset of beta_l each occur equally often; a power
// with e = 0 is the constant 1, which equals the sum of all beta_l. So
//     coef = (#pairs with e == 2^l) + (#pairs with e == 0)   (mod 2).
//
// The pair (i,j), i<j, of mu_ij = a_i b_j ^ a_j b_i is stored at index
// pair_idx(i,j,k) of a packed vector of k(k-1)/2 bits, row by row.
//
// What follows the published method: the construction of beta from gamma and
// lambda and the validity conditions. The choice of lambda and the packing
// order of mu are this design's own; neither changes the result bits.
package gnb_pkg;

  function automatic int unsigned pow_mod(int unsigned base, int unsigned e, int unsigned m);
    int unsigned     r, x;
    int unsigned     n;
    r = 1;
    x = base % m;
    n = e;
    while (n != 0) begin
      if (n[0]) r = (r * x) % m;
      x = (x * x) % m;
      n = n >> 1;
    end
    return r;
  endfunction

  function automatic bit is_prime(int unsigned n);
    if (n < 2) return 1'b0;
    for (int unsigned d = 2; d * d <= n; d++)
      if (n % d == 0) return 1'b0;
    return 1'b1;
  endfunction

  function automatic int unsigned gcd(int unsigned x, int unsigned y);
    int unsigned u, v, r;
    u = x;
    v = y;
    while (v != 0) begin
      r = u % v;
      u = v;
      v = r;
    end
    return u;
  endfunction

  // Multiplicative order of x modulo prime p (x not divisible by p).
  function automatic int unsigned order_mod(int unsigned x, int unsigned p);
    int unsigned     y;
    int unsigned     n;
    y = x % p;
    n = 1;
    while (y != 1) begin
      y = (y * x) % p;
      n++;
    end
    return n;
  endfunction

  // True when (k, T) gives an odd-type GNB: T odd, k even, T*k+1 prime,
  // gcd(T*k/s, k) = 1.
  function automatic bit gnb_valid(int unsigned k, int unsigned t);
    int unsigned p, s;
    if (k < 2 || t < 1 || t % 2 == 0 || k % 2 != 0) return 1'b0;
    p = t * k + 1;
    if (!is_prime(p)) return 1'b0;
    s = order_mod(2, p);
    if ((t * k) % s != 0) return 1'b0;
    return gcd((t * k) / s, k) == 1;
  endfunction

  // An element lambda of multiplicative order exactly T mod p, found as
  // u^((p-1)/T) for the first u that gives one. The subgroup of T-th roots of
  // unity mod p is unique, so the basis does not depend on which generator
  // of it is taken.
  function automatic int unsigned gnb_lambda(int unsigned k, int unsigned t);
    int unsigned p, c;
    p = t * k + 1;
    if (t == 1) return 1;
    for (int unsigned u = 2; u < p; u++) begin
      c = pow_mod(u, (p - 1) / t, p);
      if (order_mod(c, p) == t) return c;
    end
    return 0;
  endfunction

  // Coefficient of beta_l in beta_i * beta_j (see header).
  function automatic bit coef(int unsigned k, int unsigned t,
                              int unsigned l, int unsigned i, int unsigned j);
    int unsigned     p, lam, target;
    int unsigned     xs, yt;
    bit              acc;
    p      = t * k + 1;
    lam    = gnb_lambda(k, t);
    target = pow_mod(2, l, p);
    acc    = 1'b0;
    xs     = pow_mod(2, i, p);
    for (int unsigned s = 0; s < t; s++) begin
      yt = pow_mod(2, j, p);
      for (int unsigned u = 0; u < t; u++) begin
        if ((xs + yt) % p == target) acc = ~acc;
        if ((xs + yt) % p == 0)      acc = ~acc;
        yt = (yt * lam) % p;
      end
      xs = (xs * lam) % p;
    end
    return acc;
  endfunction

  // Index of mu_ij (i < j) in the packed mu vector.
  function automatic int unsigned pair_idx(int unsigned i, int unsigned j, int unsigned k);
    return i * k - (i * (i + 1)) / 2 + (j - i - 1);
  endfunction

  // Number of mu terms that feed the Step-5.1 tree of result bit l: the
  // off-diagonal pairs of M_l that are 1, except the (i, i+k/2) pairs, which
  // omega already supplies, plus the (i, i+k/2) pairs that are 0 in M_l,
  // which must be added once more to cancel them out of omega.
  function automatic int unsigned num_mu_terms(int unsigned k, int unsigned t, int unsigned l);
    int unsigned n;
    n = 0;
    for (int unsigned i = 0; i < k; i++)
      for (int unsigned j = i + 1; j < k; j++)
        if (coef(k, t, l, i, j) ^ (j == i + k / 2)) n++;
    return n;
  endfunction

  // C_N: number of ones in M_l.
  function automatic int unsigned count_cn(int unsigned k, int unsigned t, int unsigned l);
    int unsigned n;
    n = 0;
    for (int unsigned i = 0; i < k; i++)
      for (int unsigned j = 0; j < k; j++)
        if (coef(k, t, l, i, j)) n++;
    return n;
  endfunction

  // ceil(log2(n)) for n >= 1: depth of a balanced tree of 2-input gates.
  function automatic int unsigned tree_depth(int unsigned n);
    int unsigned d;
    d = 0;
    while ((1 << d) < n) d++;
    return d;
  endfunction

endpackage
