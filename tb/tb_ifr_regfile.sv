// tb_ifr_regfile: random writes and reads against a plain array model;
// checks register 0, the write-first bypass, single-bit correction (one
// stored bit flipped through a hierarchical reference) and double-bit
// detection.
module tb_ifr_regfile;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic we;
  logic [4:0] waddr, raddr1, raddr2;
  logic [31:0] wdata, rdata1, rdata2;
  logic corrected, uncorrectable;
  logic [31:0] model [32];

  ifr_regfile dut (.clk, .rst_n, .we, .waddr, .wdata, .raddr1, .rdata1, .raddr2, .rdata2,
                   .corrected, .uncorrectable);

  task automatic chk(bit c, string w);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", w); end
  endtask

  initial begin
    we = 0; waddr = 0; wdata = 0; raddr1 = 0; raddr2 = 0;
    for (int i = 0; i < 32; i++) model[i] = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      we = $urandom_range(1);
      waddr = 5'($urandom);
      wdata = $urandom;
      raddr1 = (t % 7 == 0) ? waddr : 5'($urandom);
      raddr2 = 5'($urandom);
      #1;
      begin
        logic [31:0] e1, e2;
        e1 = (we && waddr != 0 && waddr == raddr1) ? wdata : model[raddr1];
        e2 = (we && waddr != 0 && waddr == raddr2) ? wdata : model[raddr2];
        if (raddr1 == 0) e1 = 0;
        if (raddr2 == 0) e2 = 0;
        chk(rdata1 == e1 && rdata2 == e2, $sformatf("read t=%0d", t));
        chk(!corrected && !uncorrectable, "no ECC flags on clean data");
      end
      @(posedge clk);
      if (we && waddr != 0) model[waddr] = wdata;
    end
    @(negedge clk);
    we = 0;
    for (int r = 1; r < 32; r += 5) begin
      int b;
      b = $urandom_range(38);
      dut.mem[r][b] = ~dut.mem[r][b];
      raddr1 = 5'(r); raddr2 = 0;
      #1 chk(rdata1 == model[r] && corrected && !uncorrectable,
             $sformatf("single-bit correction r%0d bit %0d", r, b));
      dut.mem[r][(b + 3) % 39] = ~dut.mem[r][(b + 3) % 39];
      #1 chk(uncorrectable, $sformatf("double-bit detection r%0d", r));
      dut.mem[r][b] = ~dut.mem[r][b];
      dut.mem[r][(b + 3) % 39] = ~dut.mem[r][(b + 3) % 39];
      #1 chk(!corrected && !uncorrectable && rdata1 == model[r], "restored");
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
