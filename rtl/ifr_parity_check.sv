// ifr_parity_check: byte-parity checker on the output of a pipeline register.
//
// Recomputes odd parity over every GROUP (8) bits of the registered bundle and
// compares it with the parity bits that were generated in the stage and
// registered with it. `err` is high in the same cycle (combinational) when any
// byte disagrees; `err_byte` tells which. Placing the checker behind the
// register, so that it also covers the switch box and the register, is this
// design's choice.
module ifr_parity_check #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned GROUP = 8
) (
  input  logic [WIDTH-1:0]       data,
  input  logic [WIDTH/GROUP-1:0] par,
  output logic [WIDTH/GROUP-1:0] err_byte,
  output logic                   err
);
  localparam int unsigned NP = WIDTH / GROUP;

  always_comb begin
    for (int unsigned i = 0; i < NP; i++)
      err_byte[i] = (~(^data[i*GROUP +: GROUP])) != par[i];
    err = |err_byte;
  end
endmodule
