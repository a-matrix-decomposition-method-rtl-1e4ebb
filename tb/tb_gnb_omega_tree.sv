// tb_gnb_omega_tree -- checks the common-term tree (Step 4).
//
// Random mu vectors are applied to K = 6 and K = 20 instances. The expected
// omega is the XOR of the pairs (i, i+K/2), i < K/2, located by counting
// pairs row by row. For K = 6 every one of the 2^15 mu vectors is applied.
module tb_gnb_omega_tree;
  localparam int K  = 6;
  localparam int K2 = 20;
  localparam int NP  = K * (K - 1) / 2;
  localparam int NP2 = K2 * (K2 - 1) / 2;

  logic clk = 1'b0;
  logic [NP-1:0]  mu;
  logic [NP2-1:0] mu2;
  logic omega, omega2;
  int checks = 0, failures = 0;

  gnb_omega_tree           dut  (.mu(mu),  .omega(omega));
  gnb_omega_tree #(.K(K2)) dut2 (.mu(mu2), .omega(omega2));

  always #5 clk = ~clk;

  function automatic logic expect_omega(int k, logic [NP2-1:0] m);
    int idx;
    logic w;
    idx = 0;
    w = 1'b0;
    for (int i = 0; i < k; i++)
      for (int j = i + 1; j < k; j++) begin
        if (j == i + k / 2) w ^= m[idx];
        idx++;
      end
    return w;
  endfunction

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int x = 0; x < (1 << NP); x++) begin
      mu = NP'(x);
      mu2 = '0;
      for (int w = 0; w < NP2; w += 32) mu2 = (mu2 << 32) | NP2'($urandom);
      @(posedge clk);
      checks += 2;
      if (omega !== expect_omega(K, NP2'(mu))) begin
        failures++;
        if (failures < 10) $display("FAIL K=6 mu=%b", mu);
      end
      if (omega2 !== expect_omega(K2, mu2)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
