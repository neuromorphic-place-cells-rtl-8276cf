// theta_pv_sram: the preferred-velocity store of one theta unit.
//
// Two 4-bit cells hold the x and y components of the unit's preferred velocity
// as offset-binary codes (8 = zero, 0..15 = -8..+7), as in the paper.  The
// 8-bit bus carries x in bits [3:0] and y in bits [7:4], also as in the paper.
// A write happens on the rising scan clock when `we` is high; on the chip `we`
// is Write AND the first arbiter stage of this unit.  `clear` (the chip's Clear
// pin) resets both cells; resetting them to the zero code 8 rather than to 0
// is this design's choice.  The SRAM cells are modelled as flip-flops.
`timescale 1ns/1ps
module theta_pv_sram (
  input  logic       clk,
  input  logic       clear,
  input  logic       we,
  input  logic [7:0] din,
  output logic [3:0] pv_x,
  output logic [3:0] pv_y
);
  import nc_pkg::*;

  always_ff @(posedge clk) begin
    if (clear) begin
      pv_x <= VEL_ZERO;
      pv_y <= VEL_ZERO;
    end else if (we) begin
      pv_x <= din[3:0];
      pv_y <= din[7:4];
    end
  end
endmodule
