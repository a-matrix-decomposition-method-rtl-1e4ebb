// tb_gnb_mu_array -- checks the pair-sum stage (Step 3).
//
// Random partial-product matrices (not necessarily of rank one, so that
// a_i b_j and a_j b_i vary independently) are applied to K = 6 and K = 22
// instances. The expected mu vector is built by walking the pairs i < j row
// by row and XORing the two mirror cells; it must match bit for bit.
module tb_gnb_mu_array;
  localparam int K  = 6;
  localparam int K2 = 22;

  logic clk = 1'b0;
  logic [K-1:0][K-1:0]    ab;
  logic [K*(K-1)/2-1:0]   mu;
  logic [K2-1:0][K2-1:0]  ab2;
  logic [K2*(K2-1)/2-1:0] mu2;
  int checks = 0, failures = 0;

  gnb_mu_array           dut  (.ab(ab),  .mu(mu));
  gnb_mu_array #(.K(K2)) dut2 (.ab(ab2), .mu(mu2));

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 2000; n++) begin
      int idx;
      for (int i = 0; i < K; i++) ab[i] = K'($urandom);
      for (int i = 0; i < K2; i++) ab2[i] = K2'($urandom);
      @(posedge clk);
      idx = 0;
      for (int i = 0; i < K; i++)
        for (int j = i + 1; j < K; j++) begin
          checks++;
          if (mu[idx] !== (ab[i][j] ^ ab[j][i])) begin
            failures++;
            if (failures < 10) $display("FAIL K=6 pair (%0d,%0d)", i, j);
          end
          idx++;
        end
      idx = 0;
      for (int i = 0; i < K2; i++)
        for (int j = i + 1; j < K2; j++) begin
          checks++;
          if (mu2[idx] !== (ab2[i][j] ^ ab2[j][i])) failures++;
          idx++;
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
