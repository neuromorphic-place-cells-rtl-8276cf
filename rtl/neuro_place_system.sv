// neuro_place_system: the complete place-cell localisation system.
//
// Signal flow, following the paper:
//   theta chip (128 velocity-tuned oscillators, serial scanned output)
//     -> four scan multiplexers, one lookup table each (E, W, N, S)
//     -> four two-layer interference networks, each giving one vector cell
//     -> place-cell sheet (11 x 11) that moves its activity bump one cell per
//        vector-cell firing, and a FIFO that streams the vector cells to the host.
// The FPGA side also programs the chip at start-up (theta_chip_programmer) and
// drives the chip's Cap_clear phase reset (phase_reset_ctrl) at the start of a
// trail, at each velocity change and whenever a vector cell fires.
//
// The theta chip is a behavioural model (its oscillators are analog); all FPGA
// and place-cell logic is synthesizable.  Everything runs on one clock, the scan
// clock, which the FPGA also sends to the chip (6 MHz in the paper).  The host
// (not part of this design) fills the chip configuration memories and the four
// lookup tables, pulses cfg_start, then trail_start, and loads velocities.
// In the paper the place-cell sheet was simulated on the host; here it is wired
// directly to the vector cells.  The shared first-layer nodes that the paper
// mentions as a possible saving (180 instead of 240 nodes) are not used: each
// vector cell has its own complete network, as in the implemented system.
// Network filters are also cleared while Cap_clear is high (this design's
// choice).
`timescale 1ns/1ps
module neuro_place_system #(
  parameter int unsigned N_UNITS     = 128,
  parameter int unsigned N_SLOTS     = 220,
  parameter int unsigned N_NET_IN    = 80,
  parameter int unsigned GRID        = 11,
  parameter int unsigned FIFO_DEPTH  = 512,
  parameter int unsigned HOLD_CYCLES = 64,
  parameter real         F_IDLE_MEAN = 2023.771,
  parameter real         F_IDLE_SD   = 374.611,
  parameter real         BETA_MEAN   = 20.802,
  parameter real         BETA_SD     = 3.688,
  parameter real         STEP_NS     = 1000.0
) (
  input  logic                          clk,
  input  logic                          rst,
  // host: chip configuration
  input  logic                          cfg_we,
  input  logic                          cfg_sel,
  input  logic [$clog2(N_UNITS)-1:0]    cfg_addr,
  input  logic [7:0]                    cfg_data,
  input  logic                          cfg_start,
  output logic                          cfg_done,
  // host: multiplexer lookup tables
  input  logic                          lut_we,
  input  logic [1:0]                    lut_net,
  input  logic [$clog2(N_SLOTS)-1:0]    lut_addr,
  input  nc_pkg::mux_lut_t              lut_data,
  // host: trail control
  input  logic                          trail_start,
  input  logic                          vel_we,
  input  logic [7:0]                    vel_data,
  // host: vector-cell stream
  input  logic                          rd_ready,
  output logic                          rd_valid,
  output logic [3:0]                    rd_data,
  output logic                          fifo_overflow,
  // observation; theta_osc and scan_sync let the host record raw chip traces
  // for calibration (scan_sync is high during the first scan slot after
  // programming)
  output logic                          theta_osc,
  output logic                          scan_sync,
  output logic [3:0]                    vec,
  output logic                          cap_clear,
  output logic [3:0]                    reset_cause,
  output logic                          frame_stb,
  output logic [GRID*GRID*4-1:0]        place_act,
  output logic [$clog2(GRID)-1:0]       bump_row,
  output logic [$clog2(GRID)-1:0]       bump_col,
  output logic                          bump_moved
);
  import nc_pkg::*;

  theta_ctrl_t ctrl;
  logic        osc;
  logic        scan_start;
  logic [7:0]  vin_q;
  logic        vel_change;
  logic [3:0]  stb;
  logic        push;

  // ---------------- theta chip (behavioural) ----------------
  theta_chip #(
    .N_UNITS(N_UNITS), .F_IDLE_MEAN(F_IDLE_MEAN), .F_IDLE_SD(F_IDLE_SD),
    .BETA_MEAN(BETA_MEAN), .BETA_SD(BETA_SD), .STEP_NS(STEP_NS)
  ) u_chip (
    .clk, .ctrl, .vin(vin_q), .cap_clear, .osc_out(osc)
  );

  // ---------------- FPGA logic ----------------
  theta_chip_programmer #(.N_UNITS(N_UNITS), .N_PH(N_PHASE)) u_prog (
    .clk, .rst, .cfg_we, .cfg_sel, .cfg_addr, .cfg_data, .start(cfg_start),
    .ctrl, .busy(), .done(cfg_done), .scan_start
  );

  always_ff @(posedge clk) begin
    if (rst) begin
      vin_q      <= {VEL_ZERO, VEL_ZERO};
      vel_change <= 1'b0;
    end else begin
      vel_change <= vel_we && (vel_data != vin_q);
      if (vel_we) vin_q <= vel_data;
    end
  end

  for (genvar n = 0; n < N_VEC; n++) begin : g_vec
    logic [N_NET_IN-1:0] frame;
    theta_scan_mux #(.N_SLOTS(N_SLOTS), .N_BUF(N_NET_IN)) u_mux (
      .clk, .rst, .lut_we(lut_we && (lut_net == 2'(n))), .lut_addr, .lut_data,
      .start(scan_start), .osc_in(osc), .frame, .frame_stb(stb[n])
    );
    vector_cell_network #(.N_IN(N_NET_IN)) u_net (
      .clk, .rst, .clr(cap_clear), .en(stb[n]), .in_bits(frame), .vec(vec[n]),
      .l2_out()
    );
  end
  assign frame_stb = stb[0];
  assign theta_osc = osc;
  assign scan_sync = scan_start;

  phase_reset_ctrl #(.N_VEC(N_VEC), .HOLD_CYCLES(HOLD_CYCLES)) u_reset (
    .clk, .rst, .trail_start, .vel_change, .vec, .cap_clear, .cause(reset_cause)
  );

  // One vector-cell word per frame, taken once the networks have updated.
  always_ff @(posedge clk) begin
    if (rst) push <= 1'b0;
    else     push <= stb[0];
  end

  vc_fifo #(.W(4), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst, .wr_en(push), .wr_data(vec), .rd_ready, .rd_valid, .rd_data,
    .full(), .overflow(fifo_overflow), .count()
  );

  place_cell_network #(.GRID(GRID), .AW(4)) u_place (
    .clk, .rst, .vec, .act(place_act), .bump_row, .bump_col, .moved(bump_moved)
  );
endmodule
