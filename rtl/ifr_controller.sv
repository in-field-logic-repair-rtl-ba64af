// ifr_controller: self-checking repair controller.
//
// As in the paper, the controller is duplicated: both copies of the
// controller function (ifr_ctrl_fsm) receive the same inputs, the second one
// produces complemented outputs, and a two-rail checker compares the pairs.
// `ctrl` is the first copy's output and drives the core; `ctrl_error` rises
// (combinationally, in the cycle the outputs disagree) when any output pair
// is not complementary. What the system does on ctrl_error is left to the
// surrounding system; the paper does not say.
module ifr_controller
  import ifr_pkg::*;
(
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [NSTAGES-1:0]         err_v,
  input  logic [NSTAGES-1:0]         ok_v,
  input  logic [NSTAGES*NCOPIES-1:0] pwr_ok,
  input  logic [7:0]                 threshold,
  output ctrl_out_t                  ctrl,
  output logic                       ctrl_error
);
  ctrl_out_t ctrl_n;   // complemented copy
  logic trc_f, trc_g;

  ifr_ctrl_fsm #(.INVERT(1'b0)) u_main (
    .clk, .rst_n, .err_v, .ok_v, .pwr_ok, .threshold, .ctrl(ctrl)
  );

  ifr_ctrl_fsm #(.INVERT(1'b1)) u_dup (
    .clk, .rst_n, .err_v, .ok_v, .pwr_ok, .threshold, .ctrl(ctrl_n)
  );

  ifr_trc_tree #(.N(CTRL_W)) u_trc (
    .x(ctrl), .y(ctrl_n), .f(trc_f), .g(trc_g), .err(ctrl_error)
  );
endmodule
