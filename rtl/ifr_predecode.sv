// ifr_predecode: pipeline stage 1 of the IFR core (one copy; the core holds a
// main and a spare instance).
//
// Splits the fetched 32-bit instruction into its fields, classifies it
// (register or immediate operand, load, store, branch, jump, halt, writes a
// register), picks which field names the second source register and extends
// the immediate. The stage name follows the paper; the instruction set and
// this division of work are this design's own (see ifr_pkg).
//
// Interface: `instr` in, the pd_t bundle out as `out_data` with one odd
// parity bit per byte in `out_par`, generated inside the stage ahead of the
// pipeline register. While `pwr_ok` is low the block is powered off and its
// outputs are clamped to zero, which the parity checker sees as an error.
// `fi` is a fault-injection test hook applied after the parity generator.
// Combinational apart from the one flip-flop of the delay-fault model.
module ifr_predecode
  import ifr_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              pwr_ok,
  input  fi_t               fi,
  input  logic [31:0]       instr,
  output logic [PD_W-1:0]   out_data,
  output logic [PD_W/8-1:0] out_par
);
  pd_t pd;
  logic [PD_W/8-1:0] par;
  logic [PD_W-1:0]   faulty;

  always_comb begin
    opcode_e op;
    logic [15:0] imm16;
    op    = opcode_e'(instr[31:26]);
    imm16 = instr[15:0];
    pd = '0;
    pd.opcode = op;
    pd.rd     = instr[25:21];
    pd.rs1    = instr[20:16];
    pd.rs2    = instr[15:11];
    pd.imm    = {{16{imm16[15]}}, imm16};
    unique case (op)
      OP_ADD, OP_SUB, OP_AND, OP_OR, OP_XOR, OP_SLT, OP_SLL, OP_SRL: begin
        pd.use_rs1 = 1'b1; pd.use_rs2 = 1'b1; pd.wb_en = 1'b1;
      end
      OP_ADDI: begin
        pd.use_rs1 = 1'b1; pd.wb_en = 1'b1;
      end
      OP_ANDI, OP_ORI: begin
        pd.use_rs1 = 1'b1; pd.wb_en = 1'b1; pd.imm = {16'h0, imm16};
      end
      OP_LUI: begin
        pd.wb_en = 1'b1; pd.imm = {imm16, 16'h0};
      end
      OP_LW: begin
        pd.use_rs1 = 1'b1; pd.wb_en = 1'b1; pd.is_load = 1'b1;
      end
      OP_SW: begin
        pd.use_rs1 = 1'b1; pd.is_store = 1'b1; pd.rs2 = instr[25:21]; pd.rd = '0;
      end
      OP_BEQ, OP_BNE: begin
        pd.use_rs1 = 1'b1; pd.use_rs2 = 1'b1; pd.is_branch = 1'b1;
        pd.rs2 = instr[25:21]; pd.rd = '0;
      end
      OP_JAL: begin
        pd.wb_en = 1'b1; pd.is_jal = 1'b1;
      end
      OP_HALT: begin
        pd.is_halt = 1'b1; pd.rd = '0;
      end
      default: begin
        pd.opcode = OP_NOP; pd.rd = '0;   // unknown opcodes execute as NOP
      end
    endcase
    if (pd.rd == '0) pd.wb_en = 1'b0;     // register 0 is never written
  end

  ifr_parity_gen #(.WIDTH(PD_W)) u_par (.data(pd), .par(par));

  ifr_fault_inject #(.WIDTH(PD_W)) u_fi (
    .clk, .rst_n, .fi, .d_in(pd), .d_out(faulty)
  );

  assign out_data = pwr_ok ? faulty : '0;
  assign out_par  = pwr_ok ? par    : '0;
endmodule
