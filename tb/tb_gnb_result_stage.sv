// tb_gnb_result_stage -- checks the result-bit stage (Step 5) on its own.
//
// The stage's inputs (partial products, pair sums, omega) are formed here
// from operands a and b, and its output must equal the field product given
// by the independent Gauss-period model. K = 6, T = 3 is run exhaustively;
// K = 20, T = 3 (the smallest field the paper lists as using an odd-type
// GNB) gets 300 random operand pairs.
module tb_gnb_result_stage;
  import gnb_ref_pkg::*;

  localparam int K  = 6,  T  = 3;
  localparam int K2 = 20, T2 = 3;

  logic clk = 1'b0;
  int checks = 0, failures = 0;

  logic [K-1:0][K-1:0]    ab;
  logic [K*(K-1)/2-1:0]   mu;
  logic                   w;
  logic [K-1:0]           c;
  logic [K2-1:0][K2-1:0]  ab2;
  logic [K2*(K2-1)/2-1:0] mu2;
  logic                   w2;
  logic [K2-1:0]          c2;

  gnb_result_stage                   dut  (.ab(ab),  .mu(mu),  .omega(w),  .c(c));
  gnb_result_stage #(.K(K2), .T(T2)) dut2 (.ab(ab2), .mu(mu2), .omega(w2), .c(c2));

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    elem_t ea, eb, er;
    for (int x = 0; x < (1 << K); x++)
      for (int y = 0; y < (1 << K); y++) begin
        int idx;
        idx = 0;
        w = 1'b0;
        for (int i = 0; i < K; i++)
          for (int j = 0; j < K; j++) ab[i][j] = x[i] & y[j];
        for (int i = 0; i < K; i++)
          for (int j = i + 1; j < K; j++) begin
            mu[idx] = ab[i][j] ^ ab[j][i];
            if (j == i + K / 2) w ^= mu[idx];
            idx++;
          end
        @(posedge clk);
        er = ref_mul(K, T, elem_t'(x), elem_t'(y));
        checks++;
        if (c !== er[K-1:0]) begin
          failures++;
          if (failures < 10) $display("FAIL K=6 a=%0h b=%0h c=%b exp=%b", x, y, c, er[K-1:0]);
        end
      end
    for (int n = 0; n < 300; n++) begin
      int idx;
      ea = rand_elem(K2);
      eb = rand_elem(K2);
      idx = 0;
      w2 = 1'b0;
      for (int i = 0; i < K2; i++)
        for (int j = 0; j < K2; j++) ab2[i][j] = ea[i] & eb[j];
      for (int i = 0; i < K2; i++)
        for (int j = i + 1; j < K2; j++) begin
          mu2[idx] = ab2[i][j] ^ ab2[j][i];
          if (j == i + K2 / 2) w2 ^= mu2[idx];
          idx++;
        end
      @(posedge clk);
      er = ref_mul(K2, T2, ea, eb);
      checks++;
      if (c2 !== er[K2-1:0]) begin
        failures++;
        if (failures < 10) $display("FAIL K=20 c=%h exp=%h", c2, er[K2-1:0]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
