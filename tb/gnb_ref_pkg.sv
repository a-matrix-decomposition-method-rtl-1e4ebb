// gnb_ref_pkg -- reference model for Gaussian normal basis arithmetic, used
// by the testbenches to check the multiplier independently of its
// multiplication matrices.
//
// An element a = sum a_l beta_l is mapped into the cyclic ring
// GF(2)[x]/(x^p - 1), p = T*K + 1, by setting coefficient e to a_l for every
// e = 2^l * h mod p, h in the subgroup of T-th roots of unity mod p (found by
// brute force). Two such images are multiplied by cyclic convolution; the
// product's constant term stands for 1 = sum of all beta_l and is folded back
// in, so c_l = w[2^l mod p] XOR w[0]. No multiplication matrix is used.
package gnb_ref_pkg;

  localparam int MAXK = 64;
  localparam int MAXP = 1024;

  typedef logic [MAXK-1:0] elem_t;

  function automatic int unsigned pmod(int unsigned b, int unsigned e, int unsigned m);
    int unsigned r;
    r = 1;
    for (int unsigned n = 0; n < e; n++) r = (r * b) % m;
    return r;
  endfunction

  function automatic elem_t ref_mul(int k, int t, elem_t a, elem_t b);
    bit          va [MAXP];
    bit          vb [MAXP];
    bit          w  [MAXP];
    int unsigned hs [$];
    int unsigned p, e, tw;
    elem_t       c;
    p = t * k + 1;
    for (int unsigned x = 1; x < p; x++)
      if (pmod(x, t, p) == 1) hs.push_back(x);
    for (int n = 0; n < MAXP; n++) begin
      va[n] = 1'b0;
      vb[n] = 1'b0;
      w[n]  = 1'b0;
    end
    tw = 1;
    for (int l = 0; l < k; l++) begin
      foreach (hs[h]) begin
        e = (tw * hs[h]) % p;
        va[e] = a[l];
        vb[e] = b[l];
      end
      tw = (tw * 2) % p;
    end
    for (int unsigned x = 0; x < p; x++)
      if (va[x])
        for (int unsigned y = 0; y < p; y++)
          if (vb[y]) w[(x + y) % p] = ~w[(x + y) % p];
    c  = '0;
    tw = 1;
    for (int l = 0; l < k; l++) begin
      c[l] = w[tw] ^ w[0];
      tw = (tw * 2) % p;
    end
    return c;
  endfunction

  // Squaring in a normal basis: c_i = a_{i-1}, c_0 = a_{k-1}.
  function automatic elem_t rot_sq(int k, elem_t a);
    elem_t c;
    c = '0;
    for (int l = 0; l < k; l++) c[l] = a[(l + k - 1) % k];
    return c;
  endfunction

  function automatic elem_t ones(int k);
    elem_t c;
    c = '0;
    for (int l = 0; l < k; l++) c[l] = 1'b1;
    return c;
  endfunction

  function automatic elem_t rand_elem(int k);
    elem_t c;
    c = '0;
    for (int l = 0; l < k; l++) c[l] = 1'($urandom);
    return c;
  endfunction

endpackage
