// ifr_fault_inject: fault-injection point on the output of a stage copy,
// used to model the permanent faults of an aged or defective block.
//
// With fi.en low the bus passes unchanged. FI_STUCK forces bit fi.bit_idx to
// fi.stuck_val (single stuck-at fault). FI_DELAY models a delay fault on that
// bit: the bit that reaches the pipeline register is the value it had one
// cycle earlier, as if its path were slower than the clock period. The
// injection point sits after the stage's parity generator, so the parity
// still reflects the fault-free value and the checker sees the fault.
// This is a test hook of this design; in use fi is tied to zero.
module ifr_fault_inject
  import ifr_pkg::*;
#(
  parameter int unsigned WIDTH = 64
) (
  input  logic             clk,
  input  logic             rst_n,
  input  fi_t              fi,
  input  logic [WIDTH-1:0] d_in,
  output logic [WIDTH-1:0] d_out
);
  localparam int unsigned IW = (WIDTH > 1) ? $clog2(WIDTH) : 1;
  logic          late_bit;
  logic [IW-1:0] idx;
  logic          in_range;

  assign idx      = IW'(fi.bit_idx);
  assign in_range = 32'(fi.bit_idx) < WIDTH;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) late_bit <= 1'b0;
    else        late_bit <= d_in[idx];
  end

  always_comb begin
    d_out = d_in;
    if (fi.en && in_range) begin
      if (fi.kind == FI_STUCK) d_out[idx] = fi.stuck_val;
      else                     d_out[idx] = late_bit;
    end
  end
endmodule
