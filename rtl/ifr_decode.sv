// ifr_decode: pipeline stage 2 of the IFR core (one copy; the core holds a
// main and a spare instance).
//
// Takes the predecoded bundle, the two register values read from the
// register file (which is outside the replicated logic) and the instruction's
// PC, and forms the ALU operation, the two ALU operands, the store/compare
// operand and the branch or jump target (pc + 1 + imm). It also records which
// operands came from registers so that the execute stage can forward a newer
// value. The stage name follows the paper; its contents are this design's own.
//
// Output is the de_t bundle with odd byte parity generated in the stage;
// outputs are clamped to zero while `pwr_ok` is low; `fi` is the
// fault-injection test hook. Combinational apart from the delay-fault flop.
module ifr_decode
  import ifr_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              pwr_ok,
  input  fi_t               fi,
  input  logic [PD_W-1:0]   in_data,
  input  logic [31:0]       pc,
  input  logic [31:0]       rs1_val,
  input  logic [31:0]       rs2_val,
  output logic [DE_W-1:0]   out_data,
  output logic [DE_W/8-1:0] out_par
);
  pd_t pd;
  de_t de;
  logic [DE_W/8-1:0] par;
  logic [DE_W-1:0]   faulty;

  assign pd = pd_t'(in_data);

  always_comb begin
    de = '0;
    de.rd       = pd.rd;
    de.rs1      = pd.rs1;
    de.rs2      = pd.rs2;
    de.wb_en    = pd.wb_en;
    de.is_load  = pd.is_load;
    de.is_store = pd.is_store;
    de.is_jal   = pd.is_jal;
    de.is_halt  = pd.is_halt;
    de.br_eq    = pd.is_branch && pd.opcode == OP_BEQ;
    de.br_ne    = pd.is_branch && pd.opcode == OP_BNE;
    de.target   = pc + 32'd1 + pd.imm;
    de.a        = pd.use_rs1 ? rs1_val : '0;
    de.fwd_a    = pd.use_rs1;
    de.b        = pd.use_rs2 ? rs2_val : pd.imm;
    de.fwd_b    = pd.use_rs2;
    de.sd       = rs2_val;
    de.fwd_sd   = pd.is_store;
    unique case (pd.opcode)
      OP_SUB:          de.alu_op = ALU_SUB;
      OP_AND, OP_ANDI: de.alu_op = ALU_AND;
      OP_OR,  OP_ORI:  de.alu_op = ALU_OR;
      OP_XOR:          de.alu_op = ALU_XOR;
      OP_SLT:          de.alu_op = ALU_SLT;
      OP_SLL:          de.alu_op = ALU_SLL;
      OP_SRL:          de.alu_op = ALU_SRL;
      OP_LUI:          de.alu_op = ALU_PASSB;
      OP_SW: begin
        de.alu_op = ALU_ADD;
        de.b      = pd.imm;     // address = rs1 + imm, rs2 is the store data
        de.fwd_b  = 1'b0;
      end
      OP_BEQ, OP_BNE: begin
        de.alu_op = ALU_SUB;
        de.sd     = rs2_val;
        de.fwd_sd = 1'b1;
      end
      OP_JAL: begin
        de.alu_op = ALU_ADD;    // link value pc + 1
        de.a      = pc + 32'd1;
        de.b      = '0;
      end
      default:         de.alu_op = ALU_ADD;
    endcase
  end

  ifr_parity_gen #(.WIDTH(DE_W)) u_par (.data(de), .par(par));

  ifr_fault_inject #(.WIDTH(DE_W)) u_fi (
    .clk, .rst_n, .fi, .d_in(de), .d_out(faulty)
  );

  assign out_data = pwr_ok ? faulty : '0;
  assign out_par  = pwr_ok ? par    : '0;
endmodule
