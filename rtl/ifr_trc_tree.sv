// ifr_trc_tree: two-rail checker for N pairs, used to compare the controller
// with its complemented duplicate.
//
// Pair i is (x[i], y[i]); in the controller x is the true copy's output and y
// the checking copy's complemented output. N-1 two-rail cells are cascaded:
// the first combines pairs 0 and 1, each following one combines the running
// pair with the next input pair. The result (f, g) is complementary only if
// every input pair is; `err` = (f == g). Combinational. The cascade shape is
// this design's choice (a balanced tree would be equally valid).
module ifr_trc_tree #(
  parameter int unsigned N = 16
) (
  input  logic [N-1:0] x,
  input  logic [N-1:0] y,
  output logic         f,
  output logic         g,
  output logic         err
);
  logic [N-1:0] cf, cg;

  assign cf[0] = x[0];
  assign cg[0] = y[0];
  for (genvar i = 1; i < N; i++) begin : g_cell
    ifr_trc_cell u_cell (
      .x0(cf[i-1]), .y0(cg[i-1]),
      .x1(x[i]),    .y1(y[i]),
      .f (cf[i]),   .g (cg[i])
    );
  end

  assign f   = cf[N-1];
  assign g   = cg[N-1];
  assign err = ~(f ^ g);
endmodule
