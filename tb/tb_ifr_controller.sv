// tb_ifr_controller: checks the self-checking controller: a repair sequence
// (boot, permanent fault in decode, swap) with ctrl_error staying low while
// both copies agree, then a state bit of the checking copy is upset and
// ctrl_error must rise and stay high while the copies disagree.
module tb_ifr_controller;
  import ifr_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [NSTAGES-1:0] err_v, ok_v;
  logic [NSTAGES*NCOPIES-1:0] pwr_ok;
  logic [7:0] threshold;
  ctrl_out_t c;
  logic ctrl_error;

  ifr_controller dut (.clk, .rst_n, .err_v, .ok_v, .pwr_ok, .threshold, .ctrl(c), .ctrl_error);

  // power good one cycle after enable
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) pwr_ok <= '0; else pwr_ok <= c.pwr_en;

  bit err_seen = 0;
  always @(negedge clk) if (rst_n && ctrl_error) err_seen = 1;

  task automatic chk(bit cond, string w);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", w); end
  endtask

  initial begin
    int n;
    err_v = '0; ok_v = '0; threshold = 8'd4;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    n = 0;
    while (c.hold && n < 100) begin @(negedge clk); n++; end
    chk(!c.hold && c.pwr_en == 6'b010101, "booted");
    for (int i = 0; i < 4; i++) begin
      @(negedge clk) err_v = 3'b010;
      @(negedge clk) err_v = '0;
    end
    chk(c.failed[2] && c.pwr_en[3], "decode main failed, spare on");
    n = 0;
    while (c.hold && n < 100) begin @(negedge clk); n++; end
    chk(c.sel == 3'b010, "decode on spare");
    chk(!err_seen, "no controller error while the copies agree");
    // upset a state bit in the checking copy only
    @(negedge clk);
    dut.u_dup.sel[0] = 1'b1;
    #1 chk(ctrl_error, "two-rail checker flags the disagreement");
    repeat (5) @(negedge clk);
    chk(ctrl_error, "flag stays while they disagree");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
