// tb_gnb_field_check -- checks one gnb_multiplier configuration (K, T).
//
// On start, applies NVEC operand pairs, one per clock cycle: random pairs,
// plus for every a also a*a (must be the cyclic rotation of a) and a*1
// (1 = all ones, must give a). Every product is compared with the
// Gauss-period model of gnb_ref_pkg. It also checks the generated structure
// against the published closed forms: (K/2)(C_N+2T-1)-1 XOR gates, K^2 AND
// gates, an XOR depth of 1 + ceil(log2(C_N-K+2T-1)), and C_N within the
// type-T bound (T+1)K-T. done rises when finished; checks and failures
// hold the counts.
module tb_gnb_field_check #(
  parameter int K    = 6,
  parameter int T    = 3,
  parameter int NVEC = 100
) (
  input  logic clk,
  input  logic start,
  output logic done,
  output int   checks,
  output int   failures
);
  import gnb_ref_pkg::*;

  logic [K-1:0] a, b, c;

  gnb_multiplier #(.K(K), .T(T)) dut (.a(a), .b(b), .c(c));

  task automatic check(string what, logic [K-1:0] exp);
    checks++;
    if (c !== exp) begin
      failures++;
      if (failures < 5)
        $display("FAIL K=%0d T=%0d %s: a=%h b=%h c=%h exp=%h", K, T, what, a, b, c, exp);
    end
  endtask

  initial begin
    elem_t ea, eb, er;
    int cn;
    done = 1'b0;
    checks = 0;
    failures = 0;
    a = '0;
    b = '0;
    wait (start);
    cn = dut.CN;
    checks += 4;
    if (dut.NUM_AND != K * K) failures++;
    if (dut.NUM_XOR != (K / 2) * (cn + 2 * T - 1) - 1) begin
      failures++;
      $display("FAIL K=%0d T=%0d XOR count %0d", K, T, dut.NUM_XOR);
    end
    if (dut.XOR_DEPTH != 1 + gnb_pkg::tree_depth(cn - K + 2 * T - 1)) begin
      failures++;
      $display("FAIL K=%0d T=%0d XOR depth %0d", K, T, dut.XOR_DEPTH);
    end
    if (cn > (T + 1) * K - T) failures++;
    $display("K=%0d T=%0d: C_N=%0d AND=%0d XOR=%0d (naive %0d) depth T_A+%0dT_X",
             K, T, cn, dut.NUM_AND, dut.NUM_XOR, K * (cn - 1), dut.XOR_DEPTH);
    for (int n = 0; n < NVEC; n++) begin
      ea = rand_elem(K);
      eb = rand_elem(K);
      a <= ea[K-1:0];
      b <= eb[K-1:0];
      @(posedge clk);
      @(negedge clk);
      er = ref_mul(K, T, ea, eb);
      check("random", er[K-1:0]);
      b <= ea[K-1:0];
      @(posedge clk);
      @(negedge clk);
      check("square", rot_sq(K, ea)[K-1:0]);
      b <= ones(K)[K-1:0];
      @(posedge clk);
      @(negedge clk);
      check("times one", ea[K-1:0]);
    end
    done = 1'b1;
  end
endmodule
