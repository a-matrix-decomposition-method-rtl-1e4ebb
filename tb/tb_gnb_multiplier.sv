// tb_gnb_multiplier -- end-to-end test of the GNB multiplier at its default
// size, type 3 GNB for GF(2^6).
//
// All 4096 operand pairs are applied. Each product is compared with
//   * the independent Gauss-period model of gnb_ref_pkg, and
//   * c_l = a^T M_l b with the six multiplication matrices M_0..M_5 of the
//     type 3 GNB for GF(2^6) as printed in the paper's Table VI, and
//   * the paper's Example 6 equations for c_0, c_1 and omega.
// Three printed cells of Table VI break the symmetry the text states for
// every multiplication matrix ((3,5) of M_4 and M_5, (4,5) of M_4, each 1
// where its mirror cell and the cyclic-shift rule give 0). The table is
// therefore used through its lower triangle, mirrored; the test checks that
// those three cells are the only asymmetric ones and that the mirrored
// table agrees with the model cell by cell. For every a the product a*a
// must be the cyclic rotation of a and a*1
// for every a the product a*a must be the cyclic rotation of a and a*1
// (1 = all ones) must be a. The generated structure's gate counts and XOR
// depth are compared with the paper's figures for this field (C_N = 17,
// 36 AND, 65 XOR, critical path T_A + 5 T_X).
//
// Inputs change on a clock edge and the product is sampled at the next one:
// the multiplier must deliver a result within one clock cycle. Events
// counted: omega = 1, a pair term that cancels one of omega's pairs being 1,
// and a squaring (a == b); each must occur. A watchdog ends the run.
module tb_gnb_multiplier;
  import gnb_ref_pkg::*;

  localparam int K = 6;
  localparam int T = 3;

  // Table VI: M[l][i] is row i (a_i) of the matrix of c_l, column j = b_j,
  // written left to right as printed.
  localparam bit [0:5] M [6][6] = '{
    '{6'b001101, 6'b001100, 6'b110011, 6'b110000, 6'b001001, 6'b101011},
    '{6'b110101, 6'b100110, 6'b000110, 6'b111001, 6'b011000, 6'b100100},
    '{6'b010010, 6'b111010, 6'b010011, 6'b000011, 6'b111100, 6'b001100},
    '{6'b000110, 6'b001001, 6'b011101, 6'b101001, 6'b100001, 6'b011110},
    '{6'b001111, 6'b000011, 6'b100100, 6'b101111, 6'b110101, 6'b110000},
    '{6'b011000, 6'b100111, 6'b100001, 6'b010011, 6'b010111, 6'b011010}
  };

  logic clk = 1'b0;
  logic [K-1:0] a, b, c;
  int checks = 0, failures = 0;
  int n_omega = 0, n_cancel = 0, n_square = 0;
  int cycles = 0;

  gnb_multiplier dut (.a(a), .b(b), .c(c));

  always #5 clk = ~clk;
  always @(posedge clk) cycles <= cycles + 1;

  function automatic logic [K-1:0] table_mul(logic [K-1:0] x, logic [K-1:0] y);
    logic [K-1:0] r;
    for (int l = 0; l < K; l++) begin
      r[l] = 1'b0;
      for (int i = 0; i < K; i++)
        for (int j = 0; j < K; j++)
          r[l] ^= M[l][(i > j) ? i : j][(i > j) ? j : i] & x[i] & y[j];
    end
    return r;
  endfunction

  // Example 6: omega, c_0 and c_1 written out over the pair terms.
  function automatic logic [2:0] example6(logic [K-1:0] x, logic [K-1:0] y);
    logic mu [K][K];
    logic w, c0, c1;
    for (int i = 0; i < K; i++)
      for (int j = 0; j < K; j++) mu[i][j] = (x[i] & y[j]) ^ (x[j] & y[i]);
    w  = mu[0][3] ^ mu[1][4] ^ mu[2][5];
    c0 = (x[5] & y[5]) ^ w ^ mu[0][2] ^ mu[0][5] ^ mu[1][2] ^ mu[1][3] ^ mu[1][4]
         ^ mu[2][4] ^ mu[4][5];
    c1 = (x[0] & y[0]) ^ w ^ mu[0][1] ^ mu[0][5] ^ mu[1][3] ^ mu[2][3] ^ mu[2][4]
         ^ mu[2][5] ^ mu[3][5];
    return {w, c1, c0};
  endfunction

  task automatic check(string what, logic [K-1:0] got, logic [K-1:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures <= 10)
        $display("FAIL %s: a=%b b=%b got=%b exp=%b", what, a, b, got, exp);
    end
  endtask

  // Watchdog.
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    elem_t ea, eb, er;
    logic [K-1:0] one;
    int start;

    // Structure against the paper's figures for GF(2^6), type 3.
    checks++; if (dut.CN != 17)       begin failures++; $display("FAIL C_N=%0d", dut.CN); end
    checks++; if (dut.NUM_AND != 36)  begin failures++; $display("FAIL AND=%0d", dut.NUM_AND); end
    checks++; if (dut.NUM_XOR != 65)  begin failures++; $display("FAIL XOR=%0d", dut.NUM_XOR); end
    checks++; if (dut.XOR_DEPTH != 5) begin failures++; $display("FAIL depth=%0d", dut.XOR_DEPTH); end
    checks++; if (dut.NMU != 7)       begin failures++; $display("FAIL NMU=%0d", dut.NMU); end

    // Asymmetric printed cells: exactly (l,i,j) = (4,3,5), (5,3,5), (4,4,5).
    for (int l = 0; l < K; l++)
      for (int i = 0; i < K; i++)
        for (int j = i + 1; j < K; j++) begin
          bit expect_asym;
          expect_asym = (l == 4 && i == 3 && j == 5) || (l == 5 && i == 3 && j == 5) ||
                        (l == 4 && i == 4 && j == 5);
          checks++;
          if ((M[l][i][j] != M[l][j][i]) != expect_asym) begin
            failures++;
            $display("FAIL Table VI symmetry at M_%0d (%0d,%0d)", l, i, j);
          end
        end

    // Table VI against the model: unit vectors pick single matrix cells.
    for (int i = 0; i < K; i++)
      for (int j = 0; j < K; j++) begin
        logic [K-1:0] x, y;
        x = '0; y = '0; x[i] = 1'b1; y[j] = 1'b1;
        er = ref_mul(K, T, elem_t'(x), elem_t'(y));
        checks++;
        if (table_mul(x, y) !== er[K-1:0]) begin
          failures++;
          $display("FAIL Table VI cell (%0d,%0d) disagrees with the model", i, j);
        end
      end

    one = ones(K)[K-1:0];
    a = '0; b = '0;
    @(posedge clk);
    start = -1;
    for (int x = 0; x < (1 << K); x++)
      for (int y = 0; y < (1 << K); y++) begin
        a <= K'(x);
        b <= K'(y);
        @(posedge clk);     // operands applied at this edge
        @(negedge clk);
        if (start < 0) start = cycles;
        if (dut.omega) n_omega++;
        if (dut.mu[gnb_pkg::pair_idx(1, 4, K)]) n_cancel++;  // mu_14 cancels out of c_0
        if (a == b) n_square++;
        ea = elem_t'(a);
        eb = elem_t'(b);
        er = ref_mul(K, T, ea, eb);
        check("model", c, er[K-1:0]);
        check("table VI", c, table_mul(a, b));
        begin
          logic [2:0] e6;
          e6 = example6(a, b);
          check("example 6 c0,c1", {4'b0, c[1:0]}, {4'b0, e6[1:0]});
          checks++;
          if (dut.omega !== e6[2]) begin failures++; $display("FAIL omega"); end
        end
        if (a == b) check("square = rotate", c, rot_sq(K, ea)[K-1:0]);
        if (b == one) check("a*1 = a", c, a);
      end
    // One operand pair per clock cycle: the throughput of a one-cycle
    // bit-parallel multiplier.
    checks++;
    if (cycles - start != (1 << (2 * K)) - 1) begin
      failures++;
      $display("FAIL took %0d cycles for %0d products", cycles - start, 1 << (2 * K));
    end

    checks += 3;
    if (n_omega  == 0) begin failures++; $display("FAIL omega never 1"); end
    if (n_cancel == 0) begin failures++; $display("FAIL cancelling pair never 1"); end
    if (n_square == 0) begin failures++; $display("FAIL no squaring"); end
    $display("events: omega=1 %0d, cancelling pair=1 %0d, squarings %0d", n_omega, n_cancel, n_square);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
