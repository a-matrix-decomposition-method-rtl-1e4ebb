# Odd-type Gaussian normal basis multiplier by matrix decomposition

In a normal basis of GF(2^k), squaring costs nothing: it is a cyclic
rotation of the bits. Multiplication is the expensive part. Written out,
every result bit is a sum of partial products a_i b_j, and without any
sharing each bit needs its own XOR tree. Gaussian normal bases (GNB) of
type T keep these sums short. Odd T matters because of its coverage: 187
of the binary fields with 2 <= k <= 1000 in the IEEE list use an odd-type
GNB, GF(2^20), GF(2^22), GF(2^34), GF(2^42), GF(2^44), GF(2^46) and GF(2^54)
among the first of them.

This RTL is a bit-parallel (single-cycle, purely combinational) multiplier
for any odd-type GNB. It uses a matrix decomposition that shares sub-sums
between the result bits. Two properties of the multiplication matrices make
the sharing possible:

1. **Symmetry.** a_i b_j and a_j b_i always enter a result bit together, so
   each pair sum mu_ij = a_i b_j + a_j b_i is formed once and reused.
2. **The half-turn pairs.** For an odd-type GNB, each product
   a_i b_{(i+k/2) mod k} appears in exactly k-T+1 of the k result bits. In
   most fields that is nearly all of them. So the k/2 pair sums
   mu_{i,i+k/2} are added once into a common term omega, and omega goes
   into every bit. The (T-1)/2 half-turn pairs that a given bit must *not*
   contain are XORed into that bit once more, which cancels them out of
   omega.

The gate cost is k^2 AND gates and (k/2)(C_N+2T-1)-1 two-input XOR gates.
C_N is the number of ones in one multiplication matrix. The critical path is
T_A + (1 + log2(C_N-k+2T-1)) T_X, where T_A is one AND delay and T_X one XOR
delay. The straightforward circuit needs k(C_N-1) XOR gates.

## Number format

An element is a K-bit word `a`. Bit `a[i]` is the coefficient of
beta_i = beta^(2^i), so a = sum a_i beta_i. In this representation:

* addition is bitwise XOR;
* squaring is a rotation by one place toward the higher index:
  (a^2)_i = a_{i-1}, and (a^2)_0 = a_{K-1};
* the field's 1 is the all-ones word, because the basis elements of a GNB
  sum to 1.

The product c = a*b has the same format. Each bit is a bilinear form,
c_l = a^T M_l b, with a K x K multiplication matrix M_l over GF(2).

## Datapath

The multiplier `gnb_multiplier` is a chain of four stages. The step numbers
are those of the decomposition method:

| Step | Module | Gates | Delay | Output |
|---|---|---|---|---|
| 1 | `gnb_pkg` (elaboration only) | none | none | the matrices M_l, used to choose wiring |
| 2 | `gnb_and_array` | K^2 AND | T_A | `ab[i][j] = a_i b_j` |
| 3 | `gnb_mu_array` | K(K-1)/2 XOR | T_X | `mu` = all mu_ij, i<j |
| 4 | `gnb_omega_tree` | K/2-1 XOR | ceil(log2(K/2)) T_X | `omega` |
| 5.1 | `gnb_result_stage`, one tree per bit | NMU XOR per bit | ceil(log2(NMU+1)) T_X | partial sums |
| 5.2 | `gnb_result_stage`, one gate per bit | 1 XOR per bit | T_X | `c` |

Here NMU = (C_N-K+2T-3)/2 is the number of pair terms per result bit.
Every multi-input sum is a balanced binary tree of 2-input XOR gates
(`gnb_xor_tree`, which splits its inputs in halves and recurses). The
diagonal product for bit l, a_{l-1} b_{l-1}, comes straight from the AND
array into the Step 5.1 tree. omega joins each bit only at the last gate,
so its shorter path never sets the critical path.

Ports of the top:

| Port | Dir | Width | Meaning |
|---|---|---|---|
| `a` | in | K | first operand |
| `b` | in | K | second operand |
| `c` | out | K | a*b |

There is no clock, reset or handshake. `c` is valid one combinational delay
after `a` and `b` settle. A design that uses the multiplier registers its
inputs and outputs and gets one product per clock cycle.

## How one result bit is assembled

This is the part that is easy to get wrong. For result bit l, the
matrix M_l is split into three parts:

* **Diagonal.** M_l has exactly one 1 on its diagonal, at (l-1, l-1). This
  gives the term a_{l-1} b_{l-1}.
* **Half-turn cells** (i, i+K/2 mod K). There are K such cells, forming K/2
  symmetric pairs. K-T+1 cells, that is (K-T+1)/2 pairs, are 1. The other
  (T-1)/2 pairs are 0.
* **The remaining off-diagonal cells.** They come in symmetric pairs too.

omega holds *all* K/2 half-turn pairs. So bit l is

    c_l = a_{l-1} b_{l-1}
        ^ omega
        ^ (XOR of mu_ij over off-diagonal pairs i<j that are 1 in M_l,
           excluding the half-turn pairs)
        ^ (XOR of mu_{i,i+K/2} over the half-turn pairs that are 0 in M_l)

The last group removes from omega what the bit does not contain. In code the
rule is a single XOR. Pair (i,j) feeds bit l's tree exactly when
`M_l[i][j] ^ (j == i + K/2)` is 1 (`need()` in `gnb_result_stage`).

For the default type 3 GNB of GF(2^6), the half-turn pairs are mu_03, mu_14
and mu_25, so omega = mu_03 ^ mu_14 ^ mu_25. M_0 has ones at (0,3) and
(2,5) but not at (1,4). Bit 0 is therefore

    c_0 = a_5 b_5 ^ omega ^ (mu_02 ^ mu_05 ^ mu_12 ^ mu_13 ^ mu_14 ^ mu_24 ^ mu_45)

mu_14 appears in this sum only to cancel the copy inside omega. Each of the
six bits has 7 pair terms. The totals are 15 + 2 + 6*8 = 65 XOR gates and
36 AND gates, against 96 XOR gates for the straightforward circuit.

## Where the matrices come from

No matrix is stored anywhere. At elaboration time, `gnb_pkg` derives M_0 for
the given (K, T) from the definition of the basis. Let p = T*K+1, let gamma
be a primitive p-th root of unity, and let lambda have order T modulo p.
Then

    beta_i = sum_{t<T} gamma^(2^i lambda^t mod p)

Multiplying beta_i by beta_j gives T^2 powers gamma^e, with
e = 2^i lambda^s + 2^j lambda^t (mod p). A power with e = 0 is the constant
1, which equals the sum of all beta. Every other power belongs to the coset
of exactly one beta_l. So

    M_l[i][j] = (#(s,t) with e == 2^l) + (#(s,t) with e == 0)   (mod 2)

This is `gnb_pkg::coef`. M_l is then M_0 shifted along the diagonal,
M_l[i][j] = M_0[i-l][j-l] (indices mod K). This holds because squaring is a
cyclic shift.

Elaboration stops with `$fatal` in two cases:

* (K, T) is not an odd-type GNB. The conditions are: T odd, K even, p
  prime, and gcd(TK/s, K) = 1, where s is the order of 2 mod p.
* M_0 lacks a property the decomposition needs: symmetry, a single diagonal
  1 at (K-1, K-1), or K-T+1 ones on the half-turn cells.

Any element of order T can serve as lambda. They all generate the same
subgroup, so they all give the same basis.

## Parameters and fields

| Parameter | Default | Meaning |
|---|---|---|
| `K` | 6 | field degree k, even |
| `T` | 3 | GNB type, odd |

The default is the type 3 GNB of GF(2^6), the example the method is worked
through on. Other fields are chosen by overriding both parameters. The
table shows what the generated structure gives for the fields the
testbenches cover. Verilator builds the largest of them in well under a
minute.

| Field | T | C_N | AND | XOR | XOR, naive | XOR depth |
|---|---|---|---|---|---|---|
| GF(2^4) | 3 | 9 | 16 | 27 | 32 | 5 |
| GF(2^6) | 3 | 17 | 36 | 65 | 96 | 5 |
| GF(2^20) | 3 | 73 | 400 | 779 | 1440 | 7 |
| GF(2^22) | 3 | 81 | 484 | 945 | 1760 | 7 |
| GF(2^34) | 9 | 267 | 1156 | 4827 | 9044 | 9 |
| GF(2^42) | 5 | 231 | 1764 | 5039 | 9660 | 9 |
| GF(2^44) | 9 | 367 | 1936 | 8447 | 16104 | 10 |
| GF(2^46) | 3 | 177 | 2116 | 4185 | 8096 | 9 |
| GF(2^54) | 3 | 209 | 2916 | 5777 | 11232 | 9 |

XOR depth counts 2-input XOR levels after the AND level. The module
`gnb_multiplier` exposes these figures as the localparams `CN`, `NUM_AND`,
`NUM_XOR` and `XOR_DEPTH`. They count the generated structure. A synthesis
tool may merge XOR pairs that two result trees happen to share. At K=6 one
such pair exists, so synthesis reports 64 XOR cells instead of 65.

The method pays off when K > 2T. For smaller fields, such as the type 3 GNB
of GF(2^4), it still works, but it saves fewer gates than other published
bit-parallel methods.

## Departures and points to know

* **Misprinted matrix cells.** The published table of the six GF(2^6)
  matrices has three cells that break the symmetry every GNB matrix has:
  cell (3,5) of M_4 and of M_5, and cell (4,5) of M_4. Each is printed as 1,
  while its mirror cell and the cyclic-shift rule both give 0. The RTL
  derives its matrices from the basis definition, so it is not affected.
  The testbench compares against the printed table through its lower
  triangle, and it checks that these three cells are the only asymmetric
  ones.
* **Choices of this design.** The tree shape (halves, recursively), the
  order of the mu vector (pairs i<j, row by row; see
  `gnb_pkg::pair_idx`) and the choice of lambda are this design's own. None
  of them changes the result. The tree shape sets which XOR pairs a
  synthesis tool can share.
* **Timing.** The multiplier has no registers, and no pipelining is
  described for it. The single-cycle claim is a property of its
  surroundings.

## Verification

Every testbench checks itself and ends by printing
`TB_RESULT checks=N failures=M`. The reference for the product is
`tb/gnb_ref_pkg.sv`, which works independently of the multiplication
matrices. It maps each operand into GF(2)[x]/(x^p-1), sets coefficient e to
a_l for every e in the coset of beta_l, multiplies by cyclic convolution,
and folds the constant term back in: c_l = w[2^l mod p] ^ w[0].

| Testbench | What it covers |
|---|---|
| `tb_gnb_multiplier` | Default GF(2^6): all 4096 operand pairs, one per clock. Compared against the model, the printed matrix table and the worked equations for c_0, c_1 and omega. Also checks squaring = rotation, a*1 = a, the gate counts and XOR depth, and that omega and a cancelling pair term both toggle. |
| `tb_gnb_workloads` | All nine fields in the table above. GF(2^4) is run exhaustively against the model and its printed matrices, and beta_0*beta_2 = beta_0+beta_2 is checked. Every field gets random products, squarings and a*1, plus the closed-form gate counts. Uses `tb_gnb_field_check`. |
| `tb_gnb_and_array`, `tb_gnb_mu_array`, `tb_gnb_omega_tree`, `tb_gnb_result_stage` | Each stage on its own, at K=6 and at K=20 or K=22. |

To run one of them with Verilator 5:

    verilator --binary --timing --assert -Wall -Wno-fatal \
        rtl/gnb_pkg.sv tb/gnb_ref_pkg.sv rtl/gnb_xor_tree.sv rtl/gnb_and_array.sv \
        rtl/gnb_mu_array.sv rtl/gnb_omega_tree.sv rtl/gnb_result_stage.sv \
        rtl/gnb_multiplier.sv tb/tb_gnb_multiplier.sv --top-module tb_gnb_multiplier
    ./obj_dir/Vtb_gnb_multiplier

For `tb_gnb_workloads`, also add `tb/tb_gnb_field_check.sv`. To use another
field, instantiate `gnb_multiplier #(.K(k), .T(t))`. To grow the reference
model beyond K = 64 or p = 1024, raise `MAXK` and `MAXP` in
`gnb_ref_pkg`.

## Files

* `rtl/gnb_pkg.sv`: modular arithmetic, the GNB validity test, and matrix
  cells derived from the basis definition.
* `rtl/gnb_xor_tree.sv`: balanced XOR tree.
* `rtl/gnb_and_array.sv`, `rtl/gnb_mu_array.sv`, `rtl/gnb_omega_tree.sv`,
  `rtl/gnb_result_stage.sv`: Steps 2 to 5.
* `rtl/gnb_multiplier.sv`: the multiplier.
* `tb/`: the reference model and the testbenches listed above.
