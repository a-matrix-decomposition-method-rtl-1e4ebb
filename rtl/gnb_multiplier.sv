// gnb_multiplier -- bit-parallel multiplier for GF(2^K) in an odd-type
// (type T) Gaussian normal basis, built by matrix decomposition.
//
// Operands and result are in normal-basis coordinates: bit i is the
// coefficient of beta^(2^i), so squaring is a cyclic left rotation and the
// all-ones word is the field's 1. The multiplier follows the published
// decomposition, one stage per step:
//   Step 2  gnb_and_array     K^2 AND gates, all a_i b_j
//   Step 3  gnb_mu_array      K(K-1)/2 XOR gates, mu_ij = a_i b_j ^ a_j b_i
//   Step 4  gnb_omega_tree    K/2-1 XOR gates, omega = sum mu_{i,i+K/2}
//   Step 5  gnb_result_stage  K*(NMU+1) XOR gates, per-bit trees plus omega
// Step 1, building the multiplication matrices, is done at elaboration time
// in gnb_pkg. In total the circuit uses K^2 AND and (K/2)(C_N+2T-1)-1 XOR
// gates (C_N: ones per multiplication matrix), with a critical path of
// T_A + (1 + ceil(log2(C_N-K+2T-1))) T_X, as the published analysis gives.
// NUM_AND, NUM_XOR and XOR_DEPTH below count the generated structure.
// Nothing inside reads them; they are there for testbenches and
// surrounding designs, which is why a lint run lists them as unused.
//
// Interface: a, b in, c = a*b out, all K bits; no clock. The circuit is
// purely combinational, as the published design is: c is valid one
// AND-plus-XOR-tree delay after a and b settle, so a surrounding design
// can register a product every clock cycle. Default parameters K=6, T=3 are the paper's worked
// example (type 3 GNB for GF(2^6)); any odd-type GNB (K, T) can be chosen,
// and elaboration fails for a pair that is not one.
module gnb_multiplier #(
  parameter int unsigned K = 6,
  parameter int unsigned T = 3
) (
  input  logic [K-1:0] a,
  input  logic [K-1:0] b,
  output logic [K-1:0] c
);
  localparam int unsigned NPAIR = K * (K - 1) / 2;
  localparam int unsigned CN    = gnb_pkg::count_cn(K, T, 0);
  localparam int unsigned NMU   = gnb_pkg::num_mu_terms(K, T, 0);

  // Gate counts and XOR depth of the generated structure.
  localparam int unsigned NUM_AND   = K * K;
  localparam int unsigned NUM_XOR   = NPAIR + (K / 2 - 1) + K * (NMU + 1);
  localparam int unsigned OMEGA_DEPTH = 1 + gnb_pkg::tree_depth(K / 2);
  localparam int unsigned TREE_DEPTH  = 1 + gnb_pkg::tree_depth(NMU + 1);
  localparam int unsigned XOR_DEPTH =
      1 + ((OMEGA_DEPTH > TREE_DEPTH) ? OMEGA_DEPTH : TREE_DEPTH);

  logic [K-1:0][K-1:0]  ab;
  logic [NPAIR-1:0]     mu;
  logic                 omega;

  gnb_and_array    #(.K(K))         u_and   (.a(a), .b(b), .ab(ab));
  gnb_mu_array     #(.K(K))         u_mu    (.ab(ab), .mu(mu));
  gnb_omega_tree   #(.K(K))         u_omega (.mu(mu), .omega(omega));
  gnb_result_stage #(.K(K), .T(T))  u_res   (.ab(ab), .mu(mu), .omega(omega), .c(c));
endmodule
