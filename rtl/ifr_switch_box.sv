// ifr_switch_box: 2-way switch between the main and the spare copy of a
// pipeline stage, one 2x2 cell per bit.
//
// Each bit is two 2:1 multiplexers sharing the select S, exactly as the
// paper's switch-cell drawing shows: with S = 0, X1 goes to Y1 and X2 to Y2;
// with S = 1 the paths cross, X2 to Y1 and X1 to Y2. In the core X1 is the
// main copy's output bundle (data and parity), X2 the spare's, and Y1 feeds
// the pipeline register. Combinational, no state.
module ifr_switch_box #(
  parameter int unsigned WIDTH = 64
) (
  input  logic             s,
  input  logic [WIDTH-1:0] x1,
  input  logic [WIDTH-1:0] x2,
  output logic [WIDTH-1:0] y1,
  output logic [WIDTH-1:0] y2
);
  for (genvar i = 0; i < WIDTH; i++) begin : g_bit
    // upper multiplexer: input 0 = X1, input 1 = X2
    assign y1[i] = s ? x2[i] : x1[i];
    // lower multiplexer: input 0 = X2, input 1 = X1
    assign y2[i] = s ? x1[i] : x2[i];
  end
endmodule
