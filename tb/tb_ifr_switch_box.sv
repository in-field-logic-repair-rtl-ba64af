// tb_ifr_switch_box: checks the 2-way switch: with s = 0, y1 = x1 and
// y2 = x2; with s = 1 the paths cross, y1 = x2 and y2 = x1, on every bit.
module tb_ifr_switch_box;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic s;
  logic [63:0] x1, x2, y1, y2;
  ifr_switch_box #(.WIDTH(64)) dut (.s, .x1, .x2, .y1, .y2);

  initial begin
    for (int t = 0; t < 400; t++) begin
      x1 = {$urandom, $urandom};
      x2 = {$urandom, $urandom};
      s  = t[0];
      #1;
      checks++;
      if (s == 0 && (y1 !== x1 || y2 !== x2)) failures++;
      if (s == 1 && (y1 !== x2 || y2 !== x1)) failures++;
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
