// tb_ifr_execute: drives the execute stage with random operands for every
// ALU operation and compares with arithmetic written out here; checks branch
// resolution (BEQ/BNE/JAL), forwarding of the committing value into each
// operand (and no forwarding to register 0 or a non-register operand),
// parity and the isolation clamp.
module tb_ifr_execute;
  import ifr_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic pwr_ok;
  fi_t fi;
  de_t de;
  fwd_t fwd;
  logic [EX_W-1:0] out_data;
  logic [EX_W/8-1:0] out_par;
  ex_t o;

  ifr_execute dut (.clk, .rst_n, .pwr_ok, .fi, .in_data(de), .fwd, .out_data, .out_par);
  assign o = ex_t'(out_data);

  task automatic chk(bit c, string w);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", w); end
  endtask

  function automatic bit par_ok();
    for (int i = 0; i < EX_W / 8; i++)
      if ((^out_data[i*8 +: 8]) == out_par[i]) return 0;
    return 1;
  endfunction

  function automatic logic [31:0] alu(alu_op_e op, logic [31:0] a, logic [31:0] b);
    case (op)
      ALU_ADD: return a + b;
      ALU_SUB: return a + ~b + 1;
      ALU_AND: return a & b;
      ALU_OR:  return a | b;
      ALU_XOR: return a ^ b;
      ALU_SLT: return (a[31] != b[31]) ? {31'd0, a[31]} : {31'd0, a < b};
      ALU_SLL: return a << b[4:0];
      ALU_SRL: return a >> b[4:0];
      default: return b;
    endcase
  endfunction

  initial begin
    fi = '0; pwr_ok = 1; de = '0; fwd = '0;
    #1 rst_n = 1;
    for (int t = 0; t < 900; t++) begin
      logic [31:0] a, b;
      de = '0;
      de.alu_op = alu_op_e'(t % 9);
      de.a = $urandom; de.b = (t % 4 == 0) ? de.a : $urandom;
      de.sd = (t % 3 == 0) ? de.a : $urandom;
      de.rs1 = 5'($urandom); de.rs2 = 5'($urandom); de.rd = 5'($urandom);
      de.fwd_a = $urandom_range(1); de.fwd_b = $urandom_range(1); de.fwd_sd = $urandom_range(1);
      de.wb_en = 1; de.target = $urandom;
      de.br_eq = (t % 5 == 1); de.br_ne = (t % 5 == 2); de.is_jal = (t % 5 == 3);
      fwd.valid = $urandom_range(1);
      fwd.rd = (t % 2 == 0) ? de.rs1 : de.rs2;
      fwd.data = $urandom;
      #1;
      a = (fwd.valid && fwd.rd != 0 && de.fwd_a && fwd.rd == de.rs1) ? fwd.data : de.a;
      b = (fwd.valid && fwd.rd != 0 && de.fwd_b && fwd.rd == de.rs2) ? fwd.data : de.b;
      begin
        logic [31:0] sd;
        bit taken;
        sd = (fwd.valid && fwd.rd != 0 && de.fwd_sd && fwd.rd == de.rs2) ? fwd.data : de.sd;
        taken = de.is_jal || (de.br_eq && a == sd) || (de.br_ne && a != sd);
        chk(o.result == alu(de.alu_op, a, b), $sformatf("ALU op %0d", t % 9));
        chk(o.sd == sd && o.br_taken == taken && o.target == de.target && o.rd == de.rd,
            "branch / store data / target");
        chk(par_ok(), "parity");
      end
    end
    pwr_ok = 0;
    #1 chk(out_data == '0 && !par_ok(), "isolation clamp");
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
