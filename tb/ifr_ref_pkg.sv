// ifr_ref_pkg: instruction-set reference model and tiny assembler used by the
// IFR core testbenches.
//
// `ref_step` executes one instruction on an architectural state (PC, 32
// registers, data memory) straight from the ISA description, without any of
// the pipeline's structure, and reports what the core should commit for it.
// The enc_* functions build instruction words.
package ifr_ref_pkg;
  import ifr_pkg::*;

  localparam int unsigned MEM_WORDS = 256;

  typedef struct {
    logic [31:0] pc;
    logic [31:0] r [32];
    logic [31:0] m [MEM_WORDS];
    bit          halted;
  } arch_t;

  typedef struct packed {
    logic [31:0] pc;
    logic        we;
    logic [4:0]  rd;
    logic [31:0] wdata;
  } commit_t;

  function automatic logic [31:0] enc_r(opcode_e op, int rd, int rs1, int rs2);
    return {op, 5'(rd), 5'(rs1), 5'(rs2), 11'd0};
  endfunction
  function automatic logic [31:0] enc_i(opcode_e op, int rd, int rs1, int imm);
    return {op, 5'(rd), 5'(rs1), 16'(imm)};
  endfunction

  function automatic logic [31:0] sext16(logic [15:0] v);
    return {{16{v[15]}}, v};
  endfunction

  // Executes the instruction `ins` at s.pc; returns what it commits.
  function automatic commit_t ref_step(ref arch_t s, input logic [31:0] ins);
    commit_t c;
    logic [5:0]  op;
    logic [4:0]  f_rd, f_rs1, f_rs2;
    logic [31:0] x1, x2, xd, simm, zimm, nxt, val;
    bit          wr;
    op    = ins[31:26];
    f_rd  = ins[25:21];
    f_rs1 = ins[20:16];
    f_rs2 = ins[15:11];
    x1    = s.r[f_rs1];
    x2    = s.r[f_rs2];
    xd    = s.r[f_rd];
    simm  = sext16(ins[15:0]);
    zimm  = {16'd0, ins[15:0]};
    nxt   = s.pc + 1;
    wr    = 0;
    val   = '0;
    case (op)
      OP_ADD:  begin wr = 1; val = x1 + x2; end
      OP_SUB:  begin wr = 1; val = x1 - x2; end
      OP_AND:  begin wr = 1; val = x1 & x2; end
      OP_OR:   begin wr = 1; val = x1 | x2; end
      OP_XOR:  begin wr = 1; val = x1 ^ x2; end
      OP_SLT:  begin wr = 1; val = ($signed(x1) < $signed(x2)) ? 1 : 0; end
      OP_SLL:  begin wr = 1; val = x1 << x2[4:0]; end
      OP_SRL:  begin wr = 1; val = x1 >> x2[4:0]; end
      OP_ADDI: begin wr = 1; val = x1 + simm; end
      OP_ANDI: begin wr = 1; val = x1 & zimm; end
      OP_ORI:  begin wr = 1; val = x1 | zimm; end
      OP_LUI:  begin wr = 1; val = {ins[15:0], 16'd0}; end
      OP_LW:   begin wr = 1; val = s.m[(x1 + simm) % MEM_WORDS]; end
      OP_SW:   s.m[(x1 + simm) % MEM_WORDS] = xd;
      OP_BEQ:  if (x1 == xd) nxt = s.pc + 1 + simm;
      OP_BNE:  if (x1 != xd) nxt = s.pc + 1 + simm;
      OP_JAL:  begin wr = 1; val = s.pc + 1; nxt = s.pc + 1 + simm; end
      OP_HALT: s.halted = 1;
      default: ;
    endcase
    if (f_rd == 0) wr = 0;
    c.pc    = s.pc;
    c.we    = wr;
    c.rd    = wr ? f_rd : 5'd0;
    c.wdata = wr ? val : 32'd0;
    if (wr) s.r[f_rd] = val;
    s.pc = nxt;
    return c;
  endfunction
endpackage
