// tb_gnb_and_array -- checks the partial-product array (Step 2).
//
// All 4096 operand pairs of the default K = 6 are applied, one per clock
// cycle; every ab[i][j] must equal a_i AND b_j, computed here bit by bit.
// A second instance with K = 20 gets 500 random pairs. Watchdog included.
module tb_gnb_and_array;
  localparam int K  = 6;
  localparam int K2 = 20;

  logic clk = 1'b0;
  logic [K-1:0]  a, b;
  logic [K-1:0][K-1:0] ab;
  logic [K2-1:0] a2, b2;
  logic [K2-1:0][K2-1:0] ab2;
  int checks = 0, failures = 0;

  gnb_and_array              dut  (.a(a),  .b(b),  .ab(ab));
  gnb_and_array #(.K(K2))    dut2 (.a(a2), .b(b2), .ab(ab2));

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int x = 0; x < (1 << K); x++)
      for (int y = 0; y < (1 << K); y++) begin
        a = K'(x); b = K'(y);
        @(posedge clk);
        for (int i = 0; i < K; i++)
          for (int j = 0; j < K; j++) begin
            checks++;
            if (ab[i][j] !== (x[i] && y[j])) begin
              failures++;
              if (failures < 10) $display("FAIL a=%b b=%b cell (%0d,%0d)", a, b, i, j);
            end
          end
      end
    for (int n = 0; n < 500; n++) begin
      a2 = K2'($urandom); b2 = K2'($urandom);
      @(posedge clk);
      for (int i = 0; i < K2; i++)
        for (int j = 0; j < K2; j++) begin
          checks++;
          if (ab2[i][j] !== (a2[i] & b2[j])) failures++;
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
