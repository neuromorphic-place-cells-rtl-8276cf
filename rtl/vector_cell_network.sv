// vector_cell_network: the two-layer interference network that forms one
// vector cell from 80 theta-cell phases.
//
// Structure, as in the paper: 40 first-layer nodes each AND a pair of inputs
// (two theta units with close idle frequencies and opposite preferred
// directions, for offset reduction) and filter the product with a 9-tap Hamming
// FIR and a short RC stage; 20 second-layer nodes each AND two first-layer
// outputs (one x-aligned pair with one y-aligned pair) and filter with a 9-tap
// moving average and a longer RC stage; the output node is a 20-input AND.
// The wiring between layers is fixed, so a vector cell is chosen entirely by
// which phase the scan multiplexer puts in each input position: node i of
// layer 1 takes inputs 2i and 2i+1, node j of layer 2 takes layer-1 nodes 2j
// and 2j+1.  (The fixed pairing order is this design's choice.)
//
// Timing: every stage advances on `en` (one scan frame); `vec` is registered
// and follows the inputs after the pipeline and filter delays.  `clr` empties
// all filters (used at a phase reset).
`timescale 1ns/1ps
module vector_cell_network #(
  parameter int unsigned N_IN        = 80,
  parameter int unsigned L1_RC_SHIFT = 2,
  parameter int unsigned L2_RC_SHIFT = 4,
  parameter int unsigned THRESH      = 64
) (
  input  logic            clk,
  input  logic            rst,
  input  logic            clr,
  input  logic            en,
  input  logic [N_IN-1:0] in_bits,
  output logic            vec,
  output logic [N_IN/4-1:0] l2_out     // second-layer (grid-like) nodes, for observation
);
  import nc_pkg::*;
  localparam int unsigned N_L1 = N_IN / 2;
  localparam int unsigned N_L2 = N_IN / 4;

  logic [N_L1-1:0] l1;

  for (genvar i = 0; i < N_L1; i++) begin : g_l1
    interference_node #(.FIR(FIR_HAMMING), .RC_SHIFT(L1_RC_SHIFT), .THRESH(THRESH)) u_node (
      .clk, .rst, .clr, .en, .a(in_bits[2*i]), .b(in_bits[2*i+1]), .y(l1[i])
    );
  end

  for (genvar j = 0; j < N_L2; j++) begin : g_l2
    interference_node #(.FIR(FIR_MOVAVG), .RC_SHIFT(L2_RC_SHIFT), .THRESH(THRESH)) u_node (
      .clk, .rst, .clr, .en, .a(l1[2*j]), .b(l1[2*j+1]), .y(l2_out[j])
    );
  end

  // Output node: AND of all second-layer nodes.
  always_ff @(posedge clk) begin
    if (rst || clr) vec <= 1'b0;
    else if (en)    vec <= &l2_out;
  end
endmodule
