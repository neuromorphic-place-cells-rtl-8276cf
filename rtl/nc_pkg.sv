// nc_pkg: constants and types shared by the theta chip, the FPGA vector-cell
// logic and the place-cell sheet.
//
// Sizes follow the paper's main configuration: 128 theta units with 8 phase
// taps each (1024 arbiter stages), 220 phases scanned out in operation, an
// 80-input two-layer interference network (40 + 20 nodes) per vector cell,
// four vector cells (E, W, N, S) and an 11 x 11 place-cell sheet.  Velocity
// codes are 4-bit offset binary with 8 (4'b1000) meaning zero.
`timescale 1ns/1ps
package nc_pkg;

  localparam int unsigned N_THETA      = 128;   // theta units on the chip
  localparam int unsigned N_PHASE      = 8;     // phase taps per unit
  localparam int unsigned N_STAGES     = N_THETA * N_PHASE; // 1024 arbiter stages
  localparam int unsigned N_OUT_PHASES = 220;   // phases scanned in operation (60 + 8*20)
  localparam int unsigned N_NET_IN     = 80;    // network input buffer width
  localparam int unsigned N_VEC        = 4;     // vector cells: E, W, N, S
  localparam int unsigned GRID         = 11;    // place cells per side

  localparam logic [3:0] VEL_ZERO = 4'd8;       // offset-binary zero

  // Cardinal directions of the vector cells and path cells.  Rows grow
  // downwards (south), columns grow to the east.
  typedef enum logic [1:0] {
    DIR_E = 2'd0,
    DIR_W = 2'd1,
    DIR_N = 2'd2,
    DIR_S = 2'd3
  } dir_e;

  // Low-pass filter used inside an interference node.
  typedef enum logic {
    FIR_HAMMING = 1'b0,  // layer 1: 9-tap Hamming window
    FIR_MOVAVG  = 1'b1   // layer 2: 9-tap moving average
  } fir_kind_e;

  // The common control signals that the FPGA broadcasts to the theta chip.
  typedef struct packed {
    logic       clear;   // synchronous reset of SRAMs and shift chain
    logic       write;   // program enable
    logic       bypass;  // bypass bit written to the indexed stage
    logic [7:0] pv;      // preferred velocity byte: [3:0] x, [7:4] y
  } theta_ctrl_t;

  // One lookup-table entry of the scan multiplexer.
  typedef struct packed {
    logic       valid;   // this slot feeds the network
    logic [6:0] pos;     // position in the 80-bit buffer
  } mux_lut_t;

endpackage
