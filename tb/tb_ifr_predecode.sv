// tb_ifr_predecode: drives every opcode with random fields into the
// predecode stage and compares the bundle with field extraction written out
// here from the instruction-set description; also checks the byte parity,
// the output clamp while unpowered and a stuck-at fault-injection point.
module tb_ifr_predecode;
  import ifr_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic pwr_ok;
  fi_t fi;
  logic [31:0] instr;
  logic [PD_W-1:0] out_data;
  logic [PD_W/8-1:0] out_par;
  pd_t o;

  ifr_predecode dut (.clk, .rst_n, .pwr_ok, .fi, .instr, .out_data, .out_par);
  assign o = pd_t'(out_data);

  opcode_e ops [19] = '{OP_NOP, OP_ADD, OP_SUB, OP_AND, OP_OR, OP_XOR, OP_SLT, OP_SLL, OP_SRL,
                        OP_ADDI, OP_ANDI, OP_ORI, OP_LUI, OP_LW, OP_SW, OP_BEQ, OP_BNE,
                        OP_JAL, OP_HALT};

  task automatic chk(bit c, string w);
    checks++;
    if (!c) begin failures++; $display("FAIL %s (instr %h)", w, instr); end
  endtask

  function automatic bit par_ok();
    for (int i = 0; i < PD_W / 8; i++)
      if ((^out_data[i*8 +: 8]) == out_par[i]) return 0;
    return 1;
  endfunction

  initial begin
    fi = '0; pwr_ok = 1; instr = 0;
    #1 rst_n = 1;
    for (int t = 0; t < 600; t++) begin
      logic [5:0] op;
      logic [4:0] rd, rs1, rs2;
      logic [15:0] imm;
      bit rtype;
      op = (t % 25 == 24) ? 6'h2A : ops[t % 19];   // 0x2A: undefined opcode
      instr = {op, 26'($urandom)};
      rd = instr[25:21]; rs1 = instr[20:16]; rs2 = instr[15:11]; imm = instr[15:0];
      #1;
      rtype = op inside {OP_ADD, OP_SUB, OP_AND, OP_OR, OP_XOR, OP_SLT, OP_SLL, OP_SRL};
      chk(par_ok(), "parity");
      chk(o.rs1 == rs1, "rs1 field");
      if (rtype) begin
        chk(o.rs2 == rs2 && o.use_rs1 && o.use_rs2 && o.wb_en == (rd != 0) && o.rd == rd, "R-type");
      end
      if (op == OP_ADDI || op == OP_LW)
        chk(o.imm == {{16{imm[15]}}, imm} && o.use_rs1 && !o.use_rs2, "sign-extended imm");
      if (op == OP_ANDI || op == OP_ORI)
        chk(o.imm == {16'd0, imm}, "zero-extended imm");
      if (op == OP_LUI)
        chk(o.imm == {imm, 16'd0} && o.wb_en == (rd != 0), "LUI imm");
      if (op == OP_LW)  chk(o.is_load && o.wb_en == (rd != 0), "load");
      if (op == OP_SW)  chk(o.is_store && !o.wb_en && o.rs2 == rd, "store takes data reg from [25:21]");
      if (op == OP_BEQ || op == OP_BNE)
        chk(o.is_branch && !o.wb_en && o.rs2 == rd && o.use_rs2, "branch");
      if (op == OP_JAL) chk(o.is_jal && o.wb_en == (rd != 0), "jal");
      if (op == OP_HALT) chk(o.is_halt && !o.wb_en, "halt");
      if (op == OP_NOP || op == 6'h2A)
        chk(o.opcode == OP_NOP && !o.wb_en && !o.is_store && !o.is_branch && !o.is_halt, "nop");
    end
    // unpowered: clamped to zero, which is a parity error
    pwr_ok = 0;
    #1 chk(out_data == '0 && out_par == '0 && !par_ok(), "isolation clamp");
    pwr_ok = 1;
    // stuck-at-1 on imm[0] (bundle bit 8)
    instr = {OP_ADDI, 5'd1, 5'd2, 16'h0010};
    fi = '{en: 1'b1, kind: FI_STUCK, stuck_val: 1'b1, bit_idx: 8'd8};
    #1 chk(o.imm == 32'h11 && !par_ok(), "stuck-at injection is visible and breaks parity");
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
