// theta_chip: behavioural model of the mixed-signal theta chip (128 theta units
// and the shift-register I/O arbiter).
//
// Behavioural model: the units' DACs, Gilbert cells and ring oscillators are
// analog on the real chip.  The digital parts (PV SRAMs, arbiter chain and
// bypass SRAM) are the synthesizable modules theta_pv_sram and
// theta_io_arbiter.
//
// Common signals, as in the paper: Clear, Write, Bypass and the 8-bit Preferred
// Velocity bus (ctrl), the input velocity, Cap_clear (holds every oscillator at
// phase 0) and the single serial Oscillation Output.  All digital inputs are
// sampled on the rising scan clock.  The input velocity is taken here as an
// 8-bit code (x in [3:0], y in [7:4], offset binary like the PV bus) that two
// shared W-2W DACs turn into the broadcast analog voltages; the paper only
// shows it as an analog common signal.
//
// Unit-to-unit variation: unit u gets
//     F_idle(u) = F_IDLE_MEAN + F_IDLE_SD * g(u),  beta(u) = BETA_MEAN + BETA_SD * g'(u)
// where g, g' are fixed pseudo-normal numbers (sum of 12 hashed uniforms - 6)
// seeded by SEED.  The means and deviations default to Table 1 of the paper
// (2023.771 / 374.611 Hz and 20.802 / 3.688 Hz per unit inner product).
// The arbiter's one-hot token is an internal node of the chip (no pin), so its
// observation output is not used here.
`timescale 1ns/1ps
module theta_chip #(
  parameter int unsigned N_UNITS     = 128,
  parameter real         F_IDLE_MEAN = 2023.771,
  parameter real         F_IDLE_SD   = 374.611,
  parameter real         BETA_MEAN   = 20.802,
  parameter real         BETA_SD     = 3.688,
  parameter int unsigned SEED        = 1,
  parameter real         STEP_NS     = 1000.0
) (
  input  logic                clk,
  input  nc_pkg::theta_ctrl_t ctrl,
  input  logic [7:0]          vin,
  input  logic                cap_clear,
  output logic                osc_out
);
  import nc_pkg::*;
  localparam int unsigned N_PH = N_PHASE;

  // Pseudo-normal deviate for (unit, stream); fixed at elaboration.
  function automatic real gauss(input int unsigned u, input int unsigned s);
    longint unsigned h;
    real acc;
    acc = 0.0;
    for (int k = 0; k < 12; k++) begin
      h = (longint'(u) * 64'd2654435761 + longint'(k) * 64'd40503 +
           longint'(s) * 64'd97531 + longint'(SEED) * 64'd7919) & 64'hFFFF_FFFF;
      h = (h ^ (h >> 15)) * 64'd2246822519 & 64'hFFFF_FFFF;
      h = (h ^ (h >> 13)) * 64'd3266489917 & 64'hFFFF_FFFF;
      h = h ^ (h >> 16);
      acc = acc + real'(h) / 4294967296.0;
    end
    return acc - 6.0;
  endfunction

  real vin_x, vin_y;
  w2w_dac u_vin_dac_x (.code(vin[3:0]), .vout(vin_x));
  w2w_dac u_vin_dac_y (.code(vin[7:4]), .vout(vin_y));

  logic [N_UNITS-1:0]      pv_we;
  logic [N_UNITS*N_PH-1:0] phases;
  logic [N_UNITS*N_PH-1:0] token;

  for (genvar u = 0; u < N_UNITS; u++) begin : g_unit
    localparam real FI = F_IDLE_MEAN + F_IDLE_SD * gauss(u, 0);
    localparam real BT = BETA_MEAN   + BETA_SD   * gauss(u, 1);
    theta_unit #(.F_IDLE(FI), .BETA(BT), .STEP_NS(STEP_NS)) u_theta (
      .clk, .clear(ctrl.clear), .pv_we(pv_we[u]), .pv_bus(ctrl.pv),
      .vin_x, .vin_y, .cap_clear, .phase(phases[u*N_PH +: N_PH])
    );
  end

  theta_io_arbiter #(.N_UNITS(N_UNITS), .N_PH(N_PH)) u_arbiter (
    .clk, .clear(ctrl.clear), .write(ctrl.write), .bypass_in(ctrl.bypass),
    .phase_in(phases), .pv_we, .osc_out, .token
  );
endmodule
