// ifr_trc_cell: one totally self-checking two-rail checker cell.
//
// Inputs are two two-rail pairs (x0,y0) and (x1,y1); a pair is valid when its
// rails are complementary. The outputs f = x0&x1 | y0&y1 and g = x0&y1 | y0&x1
// are complementary exactly when both input pairs are. These are the standard
// textbook equations; the paper names the checker but not its gates.
module ifr_trc_cell (
  input  logic x0, y0,
  input  logic x1, y1,
  output logic f, g
);
  assign f = (x0 & x1) | (y0 & y1);
  assign g = (x0 & y1) | (y0 & x1);
endmodule
