// gnb_and_array -- Step 2 of the decomposed GNB multiplier: all partial
// products.
//
// Produces ab[i][j] = a_i AND b_j for every 0 <= i, j < K, using K^2
// two-input AND gates, as in the published method. Bit i of an operand is
// the coefficient of basis element beta_i = beta^(2^i). Purely
// combinational; delay is one AND gate (T_A).
module gnb_and_array #(
  parameter int unsigned K = 6
) (
  input  logic [K-1:0]          a,
  input  logic [K-1:0]          b,
  output logic [K-1:0][K-1:0]   ab
);
  for (genvar i = 0; i < K; i++) begin : g_row
    for (genvar j = 0; j < K; j++) begin : g_col
      assign ab[i][j] = a[i] & b[j];
    end
  end
endmodule
