// tb_ifr_power_switch: checks the power-switch model's timing: pwr_ok rises
// exactly RAMP_CYCLES clock edges after `en` is first sampled high, stays
// high while en is high, and falls at the first edge that samples en low.
module tb_ifr_power_switch;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, en = 0, pwr_ok;
  always #5 clk = ~clk;

  localparam int RAMP = 64;
  ifr_power_switch #(.RAMP_CYCLES(RAMP)) dut (.clk, .rst_n, .en, .pwr_ok);

  task automatic chk(bit c, string w);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", w); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int rep = 0; rep < 3; rep++) begin
      int n;
      @(negedge clk) en = 1;
      n = 0;
      while (!pwr_ok && n < 1000) begin @(posedge clk); #1 n++; end
      chk(n == RAMP, $sformatf("ramp took %0d edges", n));
      repeat (10) @(posedge clk);
      #1 chk(pwr_ok, "stays on");
      @(negedge clk) en = 0;
      @(posedge clk); #1 chk(!pwr_ok, "drops when disabled");
      repeat (5) @(posedge clk);
      #1 chk(!pwr_ok, "stays off");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
