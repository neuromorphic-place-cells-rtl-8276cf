// analog_dot_product: behavioural model of a theta unit's analog computation
// module.
//
// Behavioural model (not synthesizable).  On the chip two Gilbert cells
// multiply the x and y components of the preferred and the input velocity, and
// two differential pairs turn the products into currents that are summed.  The
// model computes the same quantity, normalised to velocity-code units:
//     i_dot = (pvx-Vz)(vix-Vz)/Vlsb^2 + (pvy-Vz)(viy-Vz)/Vlsb^2
// so i_dot is the inner product of the two code vectors (e.g. [4,0].[2,0] = 8).
// The sigmoid compression the paper measured at large inner products is not
// modelled; the paper keeps velocities in [-4,4] to stay in the linear range.
`timescale 1ns/1ps
module analog_dot_product #(
  parameter real V_ZERO = 0.5,
  parameter real V_LSB  = 0.05
) (
  input  real pv_x,
  input  real pv_y,
  input  real vin_x,
  input  real vin_y,
  output real i_dot
);
  always_comb
    i_dot = ((pv_x - V_ZERO) * (vin_x - V_ZERO) +
             (pv_y - V_ZERO) * (vin_y - V_ZERO)) / (V_LSB * V_LSB);
endmodule
