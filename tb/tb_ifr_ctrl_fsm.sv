// tb_ifr_ctrl_fsm: exercises the repair controller function with a power
// model written here (power good RAMP cycles after enable) and hand-made
// error/ok pulses. Checks: the daisy-chain power-up order and fetch hold
// during boot; that spares stay off; that isolated errors separated by a
// clean run of CLEAN_WINDOW instructions are forgiven; that `threshold`
// errors declare a copy failed, power it down, power up the spare, hold
// fetch until power good and then flip the switch select; that a second
// permanent fault in the same stage is fatal; and that the INVERT copy's
// outputs are the exact complement in every cycle.
module tb_ifr_ctrl_fsm;
  import ifr_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int RAMP = 5;
  localparam int CLEAN = 64;
  logic [NSTAGES-1:0] err_v, ok_v;
  logic [NSTAGES*NCOPIES-1:0] pwr_ok;
  logic [7:0] threshold;
  ctrl_out_t c, cn;
  int ramp_cnt [NSTAGES*NCOPIES];

  ifr_ctrl_fsm #(.INVERT(1'b0)) dut  (.clk, .rst_n, .err_v, .ok_v, .pwr_ok, .threshold, .ctrl(c));
  ifr_ctrl_fsm #(.INVERT(1'b1)) dutn (.clk, .rst_n, .err_v, .ok_v, .pwr_ok, .threshold, .ctrl(cn));

  // power model
  always_ff @(posedge clk) begin
    for (int i = 0; i < NSTAGES*NCOPIES; i++) begin
      if (!c.pwr_en[i]) begin ramp_cnt[i] <= 0; pwr_ok[i] <= 1'b0; end
      else if (ramp_cnt[i] < RAMP - 1) ramp_cnt[i] <= ramp_cnt[i] + 1;
      else pwr_ok[i] <= 1'b1;
    end
  end

  bit comp_bad = 0;
  always @(negedge clk) if (rst_n && cn !== ~c) comp_bad = 1;

  task automatic chk(bit cond, string w);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", w); end
  endtask

  task automatic pulse(int k, bit e);
    @(negedge clk);
    err_v = '0; ok_v = '0;
    if (e) err_v[k] = 1'b1; else ok_v[k] = 1'b1;
    @(negedge clk);
    err_v = '0; ok_v = '0;
  endtask

  initial begin
    int order [3];
    int n;
    err_v = '0; ok_v = '0; threshold = 8'd3; pwr_ok = '0;
    for (int i = 0; i < 6; i++) ramp_cnt[i] = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // boot: record the cycle each main copy's enable rises
    n = 0;
    for (int i = 0; i < 3; i++) order[i] = -1;
    while (c.hold && n < 200) begin
      @(negedge clk); n++;
      for (int i = 0; i < 3; i++) if (c.pwr_en[2*i] && order[i] < 0) order[i] = n;
      chk(!c.pwr_en[1] && !c.pwr_en[3] && !c.pwr_en[5], "spares off during boot");
    end
    chk(order[0] >= 0 && order[1] > order[0] + RAMP - 1 && order[2] > order[1] + RAMP - 1,
        $sformatf("daisy chain %0d %0d %0d", order[0], order[1], order[2]));
    chk(!c.hold && c.sel == 0 && c.pwr_en == 6'b010101, "running on main copies");

    // transient: 2 errors, a clean window, 2 errors: no swap
    pulse(1, 1); pulse(1, 1);
    for (int i = 0; i < CLEAN; i++) pulse(1, 0);
    pulse(1, 1); pulse(1, 1);
    repeat (3) @(negedge clk);
    chk(c.sel == 0 && c.failed == 0 && !c.hold, "transients forgiven");

    // interrupted clean run does not clear: 2 errors + 10 ok + 1 error -> swap
    pulse(0, 1); pulse(0, 1);
    for (int i = 0; i < 10; i++) pulse(0, 0);
    chk(c.failed == 0, "not yet failed");
    pulse(0, 1);
    chk(c.failed[0] && c.hold && !c.pwr_en[0] && c.pwr_en[1] && c.sel[0] == 0,
        "third error: main predecode failed, spare powering");
    n = 0;
    while (c.hold && n < 100) begin @(negedge clk); n++; end
    chk(c.sel[0] && !c.hold && n >= RAMP - 1, $sformatf("switched after power good (%0d cycles)", n));

    // permanent fault in execute: threshold errors in a row
    for (int i = 0; i < 3; i++) pulse(2, 1);
    chk(c.failed[4] && c.pwr_en[5] && !c.pwr_en[4], "execute main failed");
    n = 0;
    while (c.hold && n < 100) begin @(negedge clk); n++; end
    chk(c.sel == 3'b101 && !c.fatal, "execute on spare");

    // spare execute fails too: fatal
    for (int i = 0; i < 3; i++) pulse(2, 1);
    repeat (3) @(negedge clk);
    chk(c.fatal && c.hold && c.failed[5], "fatal after both copies failed");
    repeat (20) @(negedge clk);
    chk(c.fatal && c.hold, "fatal is permanent");
    chk(!comp_bad, "checking copy is always the complement");

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
