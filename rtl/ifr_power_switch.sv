// ifr_power_switch: behavioural model of the power-gating header of one
// switchable block (one copy of one pipeline stage).
//
// This is a behavioural model, not logic for synthesis: in silicon the
// sleep transistors and their power-good detector are added during place and
// route, which is where the paper adds its power gating. The model raises
// pwr_ok RAMP_CYCLES clock cycles after `en` rises (the virtual supply has
// charged) and drops it in the cycle after `en` falls. The ramp length is
// this design's choice. The block behind the switch uses pwr_ok to clamp its
// outputs (isolation) while it is off.
module ifr_power_switch #(
  parameter int unsigned RAMP_CYCLES = 64
) (
  input  logic clk,
  input  logic rst_n,
  input  logic en,
  output logic pwr_ok
);
  localparam int unsigned CW = $clog2(RAMP_CYCLES + 1);
  logic [CW-1:0] ramp;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ramp   <= '0;
      pwr_ok <= 1'b0;
    end else if (!en) begin
      ramp   <= '0;
      pwr_ok <= 1'b0;
    end else if (ramp < CW'(RAMP_CYCLES - 1)) begin
      ramp   <= ramp + 1'b1;
    end else begin
      pwr_ok <= 1'b1;
    end
  end
endmodule
