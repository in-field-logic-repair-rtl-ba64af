// tb_ifr_trc_tree: checks the two-rail checker. With every pair
// complementary the output pair (f, g) must be complementary and err low;
// with one or more non-complementary pairs (00 or 11) err must be high.
module tb_ifr_trc_tree;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  localparam int N = 16;
  logic [N-1:0] x, y;
  logic f, g, err;
  ifr_trc_tree #(.N(N)) dut (.x, .y, .f, .g, .err);

  initial begin
    for (int t = 0; t < 500; t++) begin
      int nbad;
      x = N'($urandom);
      y = ~x;
      nbad = 0;
      if (t % 2 == 1) begin
        nbad = 1 + $urandom_range(2);
        for (int k = 0; k < nbad; k++) begin
          int i;
          i = $urandom_range(N - 1);
          y[i] = x[i];        // make pair i non-complementary
        end
      end
      #1;
      checks++;
      if ((y == ~x) && (err !== 1'b0 || f === g)) failures++;
      if ((y != ~x) && err !== 1'b1) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
