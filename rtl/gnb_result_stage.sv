// gnb_result_stage -- Step 5 of the decomposed GNB multiplier: the result
// bits.
//
// Result bit c_l of an odd-type GNB product is assembled from three parts,
// as in the published method:
//   * the single diagonal product a_{l-1} b_{l-1} (indices mod K), the only
//     1 on the diagonal of multiplication matrix M_l;
//   * the shared common term omega (all K/2 pairs mu_{i,i+K/2});
//   * the pair terms mu_ij that M_l needs and omega does not supply: every
//     off-diagonal pair of M_l that is 1 outside the (i, i+K/2) pairs, plus
//     the (T-1)/2 pairs (i, i+K/2) that are 0 in M_l, which XORed in a second
//     time cancel out of omega.
// Step 5.1 sums the diagonal product and the pair terms in one balanced XOR
// tree; Step 5.2 adds omega with one further XOR gate, so omega's path meets
// each tree at its root. Each bit uses NMU = (C_N-K+2T-3)/2 pair terms and
// NMU+1 XOR gates.
//
// Which pairs each bit needs is derived at elaboration time: M_0 from the
// basis definition (gnb_pkg::coef), M_l as M_0 shifted diagonally by l, which
// holds because squaring is a cyclic shift. The published method gives the
// rule; the matrices are recomputed here for any (K, T). Elaboration stops
// with an error for a (K, T) that is not an odd-type GNB, or if M_0 breaks a
// property the method relies on (symmetry, one diagonal 1 at
// a_{l-1}b_{l-1}, K-T+1 ones among the (i, i+K/2) cells). Purely
// combinational.
module gnb_result_stage #(
  parameter int unsigned K = 6,
  parameter int unsigned T = 3
) (
  input  logic [K-1:0][K-1:0]   ab,
  input  logic [K*(K-1)/2-1:0]  mu,
  input  logic                  omega,
  output logic [K-1:0]          c
);
  localparam int unsigned NPAIR = K * (K - 1) / 2;
  localparam int unsigned IW    = (NPAIR > 1) ? $clog2(NPAIR) : 1;

  // M_0, the multiplication matrix of c_0, from the basis definition.
  function automatic logic [K-1:0][K-1:0] matrix0();
    logic [K-1:0][K-1:0] m;
    for (int unsigned i = 0; i < K; i++)
      for (int unsigned j = 0; j < K; j++)
        m[i][j] = gnb_pkg::coef(K, T, 0, i, j);
    return m;
  endfunction

  localparam logic [K-1:0][K-1:0] M0 = matrix0();

  // Cell (i,j) of M_l. Squaring is a cyclic shift, so M_l is M_0 shifted
  // diagonally by l: M_l[i][j] = M_0[i-l][j-l] (indices mod K).
  function automatic logic m_cell(int unsigned l, int unsigned i, int unsigned j);
    return M0[(i + K - l) % K][(j + K - l) % K];
  endfunction

  // Pair terms of result bit l: (i,j), i<j, with M_l[i][j] XOR (j == i+K/2).
  function automatic logic need(int unsigned l, int unsigned i, int unsigned j);
    return m_cell(l, i, j) ^ (j == i + K / 2);
  endfunction

  function automatic int unsigned count_terms();
    int unsigned n;
    n = 0;
    for (int unsigned i = 0; i < K; i++)
      for (int unsigned j = i + 1; j < K; j++)
        if (need(0, i, j)) n++;
    return n;
  endfunction

  localparam int unsigned NMU   = count_terms();
  localparam int unsigned NMUW  = (NMU > 0) ? NMU : 1;

  // Indices (into mu) of the pair terms result bit l needs, in pair order.
  function automatic logic [NMUW-1:0][IW-1:0] term_list(int unsigned l);
    logic [NMUW-1:0][IW-1:0] lst;
    int unsigned             n;
    lst = '0;
    n   = 0;
    for (int unsigned i = 0; i < K; i++)
      for (int unsigned j = i + 1; j < K; j++)
        if (need(l, i, j)) begin
          if (n < NMUW) lst[n] = IW'(gnb_pkg::pair_idx(i, j, K));
          n++;
        end
    return lst;
  endfunction

  // True when M_0 has the properties the method relies on: symmetric, a
  // single diagonal 1 at (K-1, K-1), and K-T+1 ones among the K cells
  // (i, (i+K/2) mod K) (Lemma 2).
  function automatic bit matrix_ok();
    int unsigned n;
    for (int unsigned i = 0; i < K; i++)
      for (int unsigned j = 0; j < K; j++)
        if (M0[i][j] != M0[j][i]) return 1'b0;
    for (int unsigned i = 0; i < K; i++)
      if (M0[i][i] != (i == K - 1)) return 1'b0;
    n = 0;
    for (int unsigned i = 0; i < K; i++)
      if (M0[i][(i + K / 2) % K]) n++;
    return n == K - T + 1;
  endfunction

  if (!gnb_pkg::gnb_valid(K, T)) begin : g_bad_params
    $fatal(1, "gnb_result_stage: (K=%0d, T=%0d) is not an odd-type Gaussian normal basis", K, T);
  end else if (!matrix_ok()) begin : g_bad_matrix
    $fatal(1, "gnb_result_stage: M_0 lacks a property the decomposition relies on");
  end

  for (genvar l = 0; l < K; l++) begin : g_bit
    localparam logic [NMUW-1:0][IW-1:0] LIST = term_list(l);

    logic [NMU:0] terms;   // [0]: diagonal product, [n+1]: n-th pair term
    logic         partial; // Step 5.1 tree output

    assign terms[0] = ab[(l + K - 1) % K][(l + K - 1) % K];
    for (genvar n = 0; n < NMU; n++) begin : g_term
      assign terms[n+1] = mu[LIST[n]];
    end

    gnb_xor_tree #(.N(NMU + 1)) u_tree (.in(terms), .out(partial));

    assign c[l] = partial ^ omega;   // Step 5.2
  end
endmodule
