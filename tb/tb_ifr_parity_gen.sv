// tb_ifr_parity_gen: checks the byte-parity generator at the widths of the
// three stage bundles (64, 160, 112 bits) against a bit-by-bit count of ones
// per byte: the parity bit must make every byte plus its parity odd.
module tb_ifr_parity_gen;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic [63:0]  d64;  logic [7:0]  p64;
  logic [159:0] d160; logic [19:0] p160;
  logic [111:0] d112; logic [13:0] p112;

  ifr_parity_gen #(.WIDTH(64))  u64  (.data(d64),  .par(p64));
  ifr_parity_gen #(.WIDTH(160)) u160 (.data(d160), .par(p160));
  ifr_parity_gen #(.WIDTH(112)) u112 (.data(d112), .par(p112));

  function automatic bit odd_ok(logic [7:0] b, logic p);
    int ones = 0;
    for (int i = 0; i < 8; i++) ones += b[i];
    ones += p;
    return (ones % 2) == 1;
  endfunction

  initial begin
    for (int t = 0; t < 300; t++) begin
      for (int w = 0; w < 5; w++) d160[w*32 +: 32] = $urandom;
      d64  = {$urandom, $urandom};
      d112 = {$urandom, $urandom, $urandom, 16'($urandom)};
      if (t == 0) begin d64 = '0; d160 = '0; d112 = '0; end
      if (t == 1) begin d64 = '1; d160 = '1; d112 = '1; end
      #1;
      for (int i = 0; i < 8; i++)  begin checks++; if (!odd_ok(d64[i*8 +: 8],  p64[i]))  failures++; end
      for (int i = 0; i < 20; i++) begin checks++; if (!odd_ok(d160[i*8 +: 8], p160[i])) failures++; end
      for (int i = 0; i < 14; i++) begin checks++; if (!odd_ok(d112[i*8 +: 8], p112[i])) failures++; end
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
