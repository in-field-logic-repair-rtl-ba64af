// ifr_execute: pipeline stage 3 of the IFR core (one copy; the core holds a
// main and a spare instance).
//
// Replaces any register operand with the value of the instruction that is
// committing in the same cycle (`fwd`), runs the ALU, resolves branches
// (BEQ/BNE compare operand a with the store/compare operand; JAL always
// jumps) and passes on the memory address, store data and destination. The
// stage name follows the paper; the ALU set and forwarding are this design's
// own.
//
// Output is the ex_t bundle with odd byte parity generated in the stage;
// outputs are clamped to zero while `pwr_ok` is low; `fi` is the
// fault-injection test hook. Combinational apart from the delay-fault flop.
module ifr_execute
  import ifr_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              pwr_ok,
  input  fi_t               fi,
  input  logic [DE_W-1:0]   in_data,
  input  fwd_t              fwd,
  output logic [EX_W-1:0]   out_data,
  output logic [EX_W/8-1:0] out_par
);
  de_t de;
  ex_t ex;
  logic [31:0] a, b, sd;
  logic [EX_W/8-1:0] par;
  logic [EX_W-1:0]   faulty;

  assign de = de_t'(in_data);

  always_comb begin
    logic hit_a, hit_b, hit_sd;
    hit_a  = fwd.valid && fwd.rd != '0 && de.fwd_a  && fwd.rd == de.rs1;
    hit_b  = fwd.valid && fwd.rd != '0 && de.fwd_b  && fwd.rd == de.rs2;
    hit_sd = fwd.valid && fwd.rd != '0 && de.fwd_sd && fwd.rd == de.rs2;
    a  = hit_a  ? fwd.data : de.a;
    b  = hit_b  ? fwd.data : de.b;
    sd = hit_sd ? fwd.data : de.sd;

    ex = '0;
    unique case (de.alu_op)
      ALU_SUB:   ex.result = a - b;
      ALU_AND:   ex.result = a & b;
      ALU_OR:    ex.result = a | b;
      ALU_XOR:   ex.result = a ^ b;
      ALU_SLT:   ex.result = {31'd0, $signed(a) < $signed(b)};
      ALU_SLL:   ex.result = a << b[4:0];
      ALU_SRL:   ex.result = a >> b[4:0];
      ALU_PASSB: ex.result = b;
      default:   ex.result = a + b;
    endcase
    ex.sd       = sd;
    ex.target   = de.target;
    ex.rd       = de.rd;
    ex.wb_en    = de.wb_en;
    ex.is_load  = de.is_load;
    ex.is_store = de.is_store;
    ex.is_halt  = de.is_halt;
    ex.br_taken = de.is_jal || (de.br_eq && a == sd) || (de.br_ne && a != sd);
  end

  ifr_parity_gen #(.WIDTH(EX_W)) u_par (.data(ex), .par(par));

  ifr_fault_inject #(.WIDTH(EX_W)) u_fi (
    .clk, .rst_n, .fi, .d_in(ex), .d_out(faulty)
  );

  assign out_data = pwr_ok ? faulty : '0;
  assign out_par  = pwr_ok ? par    : '0;
endmodule
