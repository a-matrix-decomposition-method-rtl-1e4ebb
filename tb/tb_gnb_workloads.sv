// tb_gnb_workloads -- runs the multiplier in every odd-type GNB field the
// paper names: type 3 GNB for GF(2^4) (Example 2, Table IV), and GF(2^20),
// GF(2^22), GF(2^46), GF(2^54) (type 3), GF(2^42) (type 5), GF(2^34) and
// GF(2^44) (type 9), the first odd-type fields of the IEEE list.
//
// GF(2^4) is checked exhaustively against the model and against the four
// multiplication matrices printed in Table IV, and Example 5's product
// beta_0 * beta_2 = beta_0 + beta_2 is checked directly. Every field gets
// random products, squarings and multiplications by 1 (tb_gnb_field_check).
module tb_gnb_workloads;
  import gnb_ref_pkg::*;

  // Table IV: M4[l][i] is row i of the matrix of c_l, as printed.
  localparam bit [0:3] M4 [4][4] = '{
    '{4'b0111, 4'b1010, 4'b1100, 4'b1001},
    '{4'b1100, 4'b1011, 4'b0101, 4'b0110},
    '{4'b0011, 4'b0110, 4'b1101, 4'b1010},
    '{4'b0101, 4'b1001, 4'b0011, 4'b1110}
  };

  localparam int NF = 8;

  logic clk = 1'b0;
  logic start = 1'b0;
  logic [NF-1:0] done;
  int fc [NF];
  int ff [NF];
  int checks = 0, failures = 0;
  logic [3:0] a4, b4, c4;

  always #5 clk = ~clk;

  gnb_multiplier #(.K(4), .T(3)) u4 (.a(a4), .b(b4), .c(c4));

  tb_gnb_field_check #(.K(4),  .T(3), .NVEC(50)) f0 (.clk(clk), .start(start), .done(done[0]), .checks(fc[0]), .failures(ff[0]));
  tb_gnb_field_check #(.K(20), .T(3), .NVEC(60)) f1 (.clk(clk), .start(start), .done(done[1]), .checks(fc[1]), .failures(ff[1]));
  tb_gnb_field_check #(.K(22), .T(3), .NVEC(60)) f2 (.clk(clk), .start(start), .done(done[2]), .checks(fc[2]), .failures(ff[2]));
  tb_gnb_field_check #(.K(34), .T(9), .NVEC(60)) f3 (.clk(clk), .start(start), .done(done[3]), .checks(fc[3]), .failures(ff[3]));
  tb_gnb_field_check #(.K(42), .T(5), .NVEC(60)) f4 (.clk(clk), .start(start), .done(done[4]), .checks(fc[4]), .failures(ff[4]));
  tb_gnb_field_check #(.K(44), .T(9), .NVEC(60)) f5 (.clk(clk), .start(start), .done(done[5]), .checks(fc[5]), .failures(ff[5]));
  tb_gnb_field_check #(.K(46), .T(3), .NVEC(60)) f6 (.clk(clk), .start(start), .done(done[6]), .checks(fc[6]), .failures(ff[6]));
  tb_gnb_field_check #(.K(54), .T(3), .NVEC(60)) f7 (.clk(clk), .start(start), .done(done[7]), .checks(fc[7]), .failures(ff[7]));

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    elem_t er;
    logic [3:0] t4;
    // GF(2^4), type 3: exhaustive, model and Table IV.
    for (int x = 0; x < 16; x++)
      for (int y = 0; y < 16; y++) begin
        a4 = 4'(x);
        b4 = 4'(y);
        @(posedge clk);
        er = ref_mul(4, 3, elem_t'(a4), elem_t'(b4));
        for (int l = 0; l < 4; l++) begin
          t4[l] = 1'b0;
          for (int i = 0; i < 4; i++)
            for (int j = 0; j < 4; j++) t4[l] ^= M4[l][i][j] & a4[i] & b4[j];
        end
        checks += 2;
        if (c4 !== er[3:0]) begin failures++; $display("FAIL GF(2^4) model a=%b b=%b", a4, b4); end
        if (c4 !== t4)      begin failures++; $display("FAIL GF(2^4) Table IV a=%b b=%b", a4, b4); end
      end
    // Example 5: beta_0 * beta_2 = beta_0 + beta_2.
    a4 = 4'b0001;
    b4 = 4'b0100;
    @(posedge clk);
    checks++;
    if (c4 !== 4'b0101) begin failures++; $display("FAIL Example 5: %b", c4); end

    start = 1'b1;
    wait (&done);
    for (int f = 0; f < NF; f++) begin
      checks += fc[f];
      failures += ff[f];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
