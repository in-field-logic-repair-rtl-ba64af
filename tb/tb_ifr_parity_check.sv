// tb_ifr_parity_check: feeds the parity checker with correctly coded words
// (expecting no error) and with words in which one data or parity bit, or
// bits in two different bytes, were flipped (expecting err and the right
// err_byte bits). Parity is computed here independently by counting ones.
module tb_ifr_parity_check;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  localparam int W = 64, NP = 8;
  logic [W-1:0] data;
  logic [NP-1:0] par, err_byte;
  logic err;

  ifr_parity_check #(.WIDTH(W)) dut (.data, .par, .err_byte, .err);

  function automatic logic [NP-1:0] mkpar(logic [W-1:0] d);
    logic [NP-1:0] p;
    for (int i = 0; i < NP; i++) begin
      int ones = 0;
      for (int j = 0; j < 8; j++) ones += d[i*8 + j];
      p[i] = (ones % 2 == 0);
    end
    return p;
  endfunction

  task automatic chk(logic e, logic [NP-1:0] eb);
    checks++;
    if (err !== e || err_byte !== eb) begin
      failures++;
      $display("FAIL data=%h par=%b err=%b/%b err_byte=%b/%b", data, par, err, e, err_byte, eb);
    end
  endtask

  initial begin
    for (int t = 0; t < 300; t++) begin
      int b, b2;
      data = {$urandom, $urandom};
      par  = mkpar(data);
      #1 chk(1'b0, '0);
      b = $urandom_range(W - 1);
      data[b] = ~data[b];
      #1 chk(1'b1, NP'(1) << (b / 8));
      data[b] = ~data[b];
      b = $urandom_range(NP - 1);
      par[b] = ~par[b];
      #1 chk(1'b1, NP'(1) << b);
      par[b] = ~par[b];
      b  = $urandom_range(7);
      b2 = 8 + $urandom_range(W - 9);
      data[b] = ~data[b]; data[b2] = ~data[b2];
      #1 chk(1'b1, (NP'(1) << 0) | (NP'(1) << (b2 / 8)));
    end
    data = '0; par = '0;   // isolated block: all zeros must be an error
    #1 chk(1'b1, '1);
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
