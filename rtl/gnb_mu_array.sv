// gnb_mu_array -- Step 3 of the decomposed GNB multiplier: symmetric pair
// sums.
//
// Every multiplication matrix of a Gaussian normal basis is symmetric, so
// a_i b_j and a_j b_i always enter a result bit together. This stage forms
// mu_ij = a_i b_j XOR a_j b_i once for each of the K(K-1)/2 pairs i < j,
// with one XOR gate each, as the published method does. mu_ij is placed at
// index gnb_pkg::pair_idx(i, j, K) (pairs ordered row by row; the ordering
// is this design's choice). Purely combinational; delay one XOR (T_X).
module gnb_mu_array #(
  parameter int unsigned K = 6
) (
  input  logic [K-1:0][K-1:0]   ab,
  output logic [K*(K-1)/2-1:0]  mu
);
  for (genvar i = 0; i < K; i++) begin : g_i
    for (genvar j = i + 1; j < K; j++) begin : g_j
      assign mu[gnb_pkg::pair_idx(i, j, K)] = ab[i][j] ^ ab[j][i];
    end
  end
endmodule
