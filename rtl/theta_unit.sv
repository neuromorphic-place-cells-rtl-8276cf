// theta_unit: behavioural model of one theta cell of the theta chip.
//
// Behavioural model (it contains the analog DAC, Gilbert-cell and oscillator
// models).  The structure is the paper's: a preferred-velocity SRAM feeds two
// W-2W DACs, the analog computation module forms the inner product of the
// preferred and the input velocity, and that current sets the frequency of the
// ring oscillator, F = F_idle + beta * (V . Vp).  The 8 phase taps go to the
// I/O arbiter.  The input velocity arrives as two analog voltages broadcast to
// all units.  Interface timing: the SRAM is written on the rising scan clock
// when pv_we is high; the oscillator runs on its own, asynchronously.
`timescale 1ns/1ps
module theta_unit #(
  parameter real F_IDLE  = 2023.771,
  parameter real BETA    = 20.802,
  parameter real STEP_NS = 1000.0,
  parameter real V_ZERO  = 0.5,
  parameter real V_LSB   = 0.05
) (
  input  logic       clk,
  input  logic       clear,
  input  logic       pv_we,
  input  logic [7:0] pv_bus,
  input  real        vin_x,
  input  real        vin_y,
  input  logic       cap_clear,
  output logic [7:0] phase
);
  logic [3:0] pv_x, pv_y;
  real        v_px, v_py, i_dot;

  theta_pv_sram u_sram (
    .clk, .clear, .we(pv_we), .din(pv_bus), .pv_x, .pv_y
  );

  w2w_dac #(.V_ZERO(V_ZERO), .V_LSB(V_LSB)) u_dac_x (.code(pv_x), .vout(v_px));
  w2w_dac #(.V_ZERO(V_ZERO), .V_LSB(V_LSB)) u_dac_y (.code(pv_y), .vout(v_py));

  analog_dot_product #(.V_ZERO(V_ZERO), .V_LSB(V_LSB)) u_dot (
    .pv_x(v_px), .pv_y(v_py), .vin_x, .vin_y, .i_dot
  );

  ring_oscillator #(.F_IDLE(F_IDLE), .BETA(BETA), .STEP_NS(STEP_NS)) u_osc (
    .i_dot, .cap_clear, .phase
  );
endmodule
