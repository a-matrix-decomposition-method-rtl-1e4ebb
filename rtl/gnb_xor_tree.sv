// gnb_xor_tree -- balanced binary tree of 2-input XOR gates.
//
// Returns the XOR of all N input bits using N-1 two-input XOR gates arranged
// as a balanced binary tree of depth ceil(log2 N), the summation structure
// the multiplier uses in every step that adds more than two terms. The tree
// is built by splitting the input in two halves and recursing. Purely
// combinational. N must be at least 1; for N = 1 the bit is passed through.
module gnb_xor_tree #(
  parameter int unsigned N = 2
) (
  input  logic [N-1:0] in,
  output logic         out
);
  if (N == 1) begin : g_leaf
    assign out = in[0];
  end else if (N == 2) begin : g_pair
    assign out = in[0] ^ in[1];
  end else begin : g_split
    localparam int unsigned NLO = N / 2;
    logic lo, hi;
    gnb_xor_tree #(.N(NLO))     u_lo (.in(in[NLO-1:0]), .out(lo));
    gnb_xor_tree #(.N(N - NLO)) u_hi (.in(in[N-1:NLO]), .out(hi));
    assign out = lo ^ hi;
  end
endmodule
