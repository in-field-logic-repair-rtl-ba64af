// tb_ifr_decode: builds predecoded bundles by hand, drives the decode stage
// with random register values and PC, and checks the ALU operation, operand
// selection, store/compare operand, branch target pc + 1 + imm and the
// forwarding flags; also checks parity, the isolation clamp and a delay
// fault (the faulty bit shows the previous cycle's value).
module tb_ifr_decode;
  import ifr_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic pwr_ok;
  fi_t fi;
  pd_t pd;
  logic [31:0] pc, rs1_val, rs2_val;
  logic [DE_W-1:0] out_data;
  logic [DE_W/8-1:0] out_par;
  de_t o;

  ifr_decode dut (.clk, .rst_n, .pwr_ok, .fi, .in_data(pd), .pc, .rs1_val, .rs2_val,
                  .out_data, .out_par);
  assign o = de_t'(out_data);

  task automatic chk(bit c, string w);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", w); end
  endtask

  function automatic bit par_ok();
    for (int i = 0; i < DE_W / 8; i++)
      if ((^out_data[i*8 +: 8]) == out_par[i]) return 0;
    return 1;
  endfunction

  initial begin
    fi = '0; pwr_ok = 1; pd = '0; pc = 0; rs1_val = 0; rs2_val = 0;
    #1 rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      pd = '0;
      pd.rd = 5'($urandom); pd.rs1 = 5'($urandom); pd.rs2 = 5'($urandom);
      pd.imm = $urandom;
      pc = $urandom_range(1000);
      rs1_val = $urandom; rs2_val = $urandom;
      case (t % 6)
        0: begin pd.opcode = OP_SUB;  pd.use_rs1 = 1; pd.use_rs2 = 1; pd.wb_en = 1; end
        1: begin pd.opcode = OP_ADDI; pd.use_rs1 = 1; pd.wb_en = 1; end
        2: begin pd.opcode = OP_SW;   pd.use_rs1 = 1; pd.is_store = 1; end
        3: begin pd.opcode = OP_BNE;  pd.use_rs1 = 1; pd.use_rs2 = 1; pd.is_branch = 1; end
        4: begin pd.opcode = OP_JAL;  pd.is_jal = 1; pd.wb_en = 1; end
        default: begin pd.opcode = OP_LUI; pd.wb_en = 1; end
      endcase
      #1;
      chk(par_ok(), "parity");
      chk(o.rd == pd.rd && o.wb_en == pd.wb_en && o.target == pc + 1 + pd.imm, "rd/wb/target");
      case (t % 6)
        0: chk(o.alu_op == ALU_SUB && o.a == rs1_val && o.b == rs2_val && o.fwd_a && o.fwd_b, "SUB operands");
        1: chk(o.alu_op == ALU_ADD && o.a == rs1_val && o.b == pd.imm && o.fwd_a && !o.fwd_b, "ADDI operands");
        2: chk(o.alu_op == ALU_ADD && o.a == rs1_val && o.b == pd.imm && o.sd == rs2_val &&
               o.fwd_sd && !o.fwd_b && o.is_store, "SW operands");
        3: chk(o.br_ne && !o.br_eq && o.a == rs1_val && o.sd == rs2_val && o.fwd_sd, "BNE operands");
        4: chk(o.is_jal && o.alu_op == ALU_ADD && o.a == pc + 1 && o.b == 0, "JAL link");
        default: chk(o.alu_op == ALU_PASSB && o.b == pd.imm && !o.fwd_a, "LUI operand");
      endcase
    end
    pwr_ok = 0;
    #1 chk(out_data == '0 && !par_ok(), "isolation clamp");
    pwr_ok = 1;
    // delay fault on a[0] (bundle bit 121): shows the value of the previous cycle
    fi = '{en: 1'b1, kind: FI_DELAY, stuck_val: 1'b0, bit_idx: 8'd121};
    pd = '0; pd.opcode = OP_ADDI; pd.use_rs1 = 1;
    rs1_val = 32'h0;
    @(posedge clk); #1;
    rs1_val = 32'h1;
    #1 chk(o.a == 32'h0 && !par_ok(), "delay fault: late bit still 0");
    @(posedge clk); #1 chk(o.a == 32'h1 && par_ok(), "delay fault: bit arrives one cycle later");
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
