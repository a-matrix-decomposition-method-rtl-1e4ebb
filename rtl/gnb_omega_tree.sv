// gnb_omega_tree -- Step 4 of the decomposed GNB multiplier: the common term.
//
// For an odd-type GNB each product a_i b_{(i+K/2) mod K} appears in K-T+1 of
// the K result bits. The method therefore sums the K/2 pair terms
//     omega = mu_{0,K/2} ^ mu_{1,K/2+1} ^ ... ^ mu_{K/2-1,K-1}
// once, with K/2-1 XOR gates in a balanced tree, and shares omega among all
// result bits. Purely combinational; delay ceil(log2(K/2)) T_X.
module gnb_omega_tree #(
  parameter int unsigned K = 6
) (
  input  logic [K*(K-1)/2-1:0]  mu,
  output logic                  omega
);
  localparam int unsigned H = K / 2;

  logic [H-1:0] half_terms;

  for (genvar i = 0; i < H; i++) begin : g_term
    assign half_terms[i] = mu[gnb_pkg::pair_idx(i, i + H, K)];
  end

  gnb_xor_tree #(.N(H)) u_tree (.in(half_terms), .out(omega));
endmodule
