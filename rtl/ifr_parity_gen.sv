// ifr_parity_gen: byte-parity generator placed at the output of every
// pipeline-stage copy, ahead of the pipeline register.
//
// One parity bit is produced for every GROUP (8) bits of the bundle, as the
// paper prescribes. The parity is odd (this design's choice): a byte that is
// all zeros, as produced by an isolated or unpowered block, together with a
// zero parity bit is an error. Purely combinational; WIDTH must be a multiple
// of GROUP.
module ifr_parity_gen #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned GROUP = 8
) (
  input  logic [WIDTH-1:0]       data,
  output logic [WIDTH/GROUP-1:0] par
);
  localparam int unsigned NP = WIDTH / GROUP;

  initial assert (WIDTH % GROUP == 0) else $error("WIDTH must be a multiple of GROUP");

  always_comb begin
    for (int unsigned i = 0; i < NP; i++)
      par[i] = ~(^data[i*GROUP +: GROUP]);
  end
endmodule
