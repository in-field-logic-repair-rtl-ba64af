// ifr_pkg: types, constants and helper functions shared by the in-field-repair
// (IFR) processor core.
//
// The core is a 32-bit, 3-stage pipeline (predecode, decode, execute) in which
// every stage exists twice, a main copy and a cold spare. The 32-bit width, the
// three stages and the one-parity-bit-per-byte rule follow the paper. The
// instruction set is this design's own; the paper only says the core is a
// "simple, custom" one. Encoding (word-addressed PC, rd/rs1/rs2 fields):
//
//   [31:26] opcode  [25:21] rd  [20:16] rs1  [15:11] rs2  [15:0] imm16
//
//   ADD SUB AND OR XOR SLT SLL SRL   rd = rs1 op rs2
//   ADDI (sign-extended imm), ANDI ORI (zero-extended), LUI rd = imm << 16
//   LW  rd = mem[rs1 + simm]         SW  mem[rs1 + simm] = R[25:21]
//   BEQ/BNE  if (rs1 ==/!= R[25:21]) pc = pc + 1 + simm
//   JAL rd = pc + 1; pc = pc + 1 + simm
//   HALT stops fetching once it commits; any other opcode is a NOP.
//
// Stage bundles are packed structs padded to whole bytes so that each byte of
// a bundle carries one parity bit.
package ifr_pkg;

  typedef enum logic [5:0] {
    OP_NOP  = 6'h00,
    OP_ADD  = 6'h01,
    OP_SUB  = 6'h02,
    OP_AND  = 6'h03,
    OP_OR   = 6'h04,
    OP_XOR  = 6'h05,
    OP_SLT  = 6'h06,
    OP_SLL  = 6'h07,
    OP_SRL  = 6'h08,
    OP_ADDI = 6'h09,
    OP_ANDI = 6'h0A,
    OP_ORI  = 6'h0B,
    OP_LUI  = 6'h0C,
    OP_LW   = 6'h10,
    OP_SW   = 6'h11,
    OP_BEQ  = 6'h12,
    OP_BNE  = 6'h13,
    OP_JAL  = 6'h14,
    OP_HALT = 6'h3F
  } opcode_e;

  typedef enum logic [3:0] {
    ALU_ADD = 4'd0,
    ALU_SUB = 4'd1,
    ALU_AND = 4'd2,
    ALU_OR  = 4'd3,
    ALU_XOR = 4'd4,
    ALU_SLT = 4'd5,
    ALU_SLL = 4'd6,
    ALU_SRL = 4'd7,
    ALU_PASSB = 4'd8
  } alu_op_e;

  // Predecode -> decode bundle (64 bits, 8 parity bits).
  typedef struct packed {
    logic [2:0]  pad;
    opcode_e     opcode;
    logic [4:0]  rd;
    logic [4:0]  rs1;
    logic [4:0]  rs2;      // second source: [15:11] for ALU ops, [25:21] for SW/BEQ/BNE
    logic [31:0] imm;      // already sign- or zero-extended / shifted
    logic        use_rs1;
    logic        use_rs2;  // second ALU operand is a register (else the immediate)
    logic        wb_en;
    logic        is_load;
    logic        is_store;
    logic        is_branch;
    logic        is_jal;
    logic        is_halt;
  } pd_t;

  // Decode -> execute bundle (160 bits, 20 parity bits).
  typedef struct packed {
    logic [2:0]  pad;
    alu_op_e     alu_op;
    logic [31:0] a;
    logic [31:0] b;
    logic [31:0] sd;       // store data / branch compare operand
    logic [31:0] target;   // branch and jump target
    logic [4:0]  rd;
    logic [4:0]  rs1;
    logic [4:0]  rs2;
    logic        fwd_a;    // a came from register rs1
    logic        fwd_b;    // b came from register rs2
    logic        fwd_sd;   // sd came from register rs2
    logic        wb_en;
    logic        is_load;
    logic        is_store;
    logic        br_eq;
    logic        br_ne;
    logic        is_jal;
    logic        is_halt;
  } de_t;

  // Execute -> commit bundle (112 bits, 14 parity bits).
  typedef struct packed {
    logic [5:0]  pad;
    logic [31:0] result;   // ALU result, memory address or link value
    logic [31:0] sd;
    logic [31:0] target;
    logic [4:0]  rd;
    logic        wb_en;
    logic        is_load;
    logic        is_store;
    logic        br_taken;
    logic        is_halt;
  } ex_t;

  localparam int unsigned PD_W = $bits(pd_t);
  localparam int unsigned DE_W = $bits(de_t);
  localparam int unsigned EX_W = $bits(ex_t);

  // Register value forwarded from the committing instruction.
  typedef struct packed {
    logic        valid;
    logic [4:0]  rd;
    logic [31:0] data;
  } fwd_t;

  // Fault-injection control of one stage copy (test hook; tie to '0 in use).
  typedef enum logic {FI_STUCK = 1'b0, FI_DELAY = 1'b1} fi_kind_e;
  typedef struct packed {
    logic       en;
    fi_kind_e   kind;       // stuck-at, or bit arrives one cycle late
    logic       stuck_val;
    logic [7:0] bit_idx;    // output bit of the stage bundle
  } fi_t;

  localparam int unsigned NSTAGES = 3;   // predecode, decode, execute
  localparam int unsigned NCOPIES = 2;   // main (0), spare (1)

  // Controller outputs; the checking copy produces the bitwise complement.
  typedef struct packed {
    logic [NSTAGES-1:0]         sel;      // 1: spare copy of the stage is in use
    logic [NSTAGES*NCOPIES-1:0] pwr_en;   // index 2*stage + copy
    logic [NSTAGES*NCOPIES-1:0] failed;   // copy declared permanently faulty
    logic                       hold;     // stop fetching
    logic                       fatal;    // both copies of some stage failed
  } ctrl_out_t;
  localparam int unsigned CTRL_W = $bits(ctrl_out_t);

  // Odd parity of each byte: an all-zero byte has parity error.
  function automatic logic odd_parity8(input logic [7:0] b);
    return ~(^b);
  endfunction

  // SECDED code for the register file: Hamming(38,32) with check bits at
  // positions 1,2,4,8,16,32 and data in the remaining positions 3..38, plus
  // an overall parity bit as bit 0 of the 39-bit codeword.
  localparam int unsigned ECC_W = 39;

  function automatic logic [ECC_W-1:0] ecc_encode(input logic [31:0] d);
    logic [ECC_W-1:0] c;
    int unsigned k;
    c = '0;
    k = 0;
    for (int unsigned p = 1; p < ECC_W; p++) begin
      if ((p & (p - 1)) != 0) begin
        c[p] = d[k];
        k++;
      end
    end
    for (int unsigned i = 0; i < 6; i++) begin
      logic s;
      s = 1'b0;
      for (int unsigned p = 1; p < ECC_W; p++)
        if (((p >> i) & 1) != 0 && p != (1 << i)) s ^= c[p];
      c[1 << i] = s;
    end
    c[0] = ^c[ECC_W-1:1];
    return c;
  endfunction

  typedef struct packed {
    logic [31:0] data;
    logic        corrected;    // single-bit error fixed
    logic        uncorrectable;// double-bit error detected
  } ecc_dec_t;

  function automatic ecc_dec_t ecc_decode(input logic [ECC_W-1:0] c_in);
    logic [ECC_W-1:0] c;
    logic [5:0] syn;
    logic overall;
    ecc_dec_t r;
    int unsigned k;
    c = c_in;
    syn = '0;
    for (int unsigned p = 1; p < ECC_W; p++)
      if (c[p]) syn ^= 6'(p);
    overall = ^c;
    r.corrected = 1'b0;
    r.uncorrectable = 1'b0;
    if (syn != 0 && overall) begin
      if (int'(syn) < ECC_W) c[syn] = ~c[syn];
      r.corrected = 1'b1;
    end else if (syn != 0) begin
      r.uncorrectable = 1'b1;
    end else if (overall) begin
      r.corrected = 1'b1;   // the overall parity bit itself flipped
    end
    r.data = '0;
    k = 0;
    for (int unsigned p = 1; p < ECC_W; p++) begin
      if ((p & (p - 1)) != 0) begin
        r.data[k] = c[p];
        k++;
      end
    end
    return r;
  endfunction

endpackage
