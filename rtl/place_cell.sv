// place_cell: one place cell of the path-integration sheet, together with its
// four outgoing path cells.
//
// Following the paper, a place cell keeps itself active through a
// self-excitatory loop.  Its path cells (one per direction E, W, N, S) act as
// gates: path cell d fires when this cell is active and vector cell d fires.
// A firing path cell excites the neighbour in direction d and opens this cell's
// self-excitatory loop, so the activity bump moves one cell.  Every event also
// applies a global leak, which lets a cell that lost its loop decay back to
// baseline.  With the paper's numbers an active cell holds ACT_FIRE = 10, the
// cell it just left shows 10 - LEAK = 5, and one event later 0.
//
// Interface: `step` is a one-clock pulse carrying the firing directions
// (`vc_pulse`, one bit per dir_e).  `exc_in[d]` is the excitation arriving from
// the path cell of the neighbour that lies in direction d; `path_out[d]` is
// this cell's own path cell d (combinational, valid while `step` is high).
// Activity updates on the clock edge that ends the `step` cycle.  A path cell
// toward the edge of the sheet does not exist (HAS_NB masks it), so the bump
// stays at the border: this edge rule, the clearing to 0 / ACT_FIRE at reset
// (INIT_ACTIVE) and the event-driven leak are this design's choices.
`timescale 1ns/1ps
module place_cell #(
  parameter int unsigned AW          = 4,
  parameter int unsigned ACT_FIRE    = 10,
  parameter int unsigned LEAK        = 5,
  parameter logic [3:0]  HAS_NB      = 4'b1111,
  parameter bit          INIT_ACTIVE = 1'b0
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          step,
  input  logic [3:0]    vc_pulse,
  input  logic [3:0]    exc_in,
  output logic [3:0]    path_out,
  output logic [AW-1:0] act,
  output logic          firing
);
  assign firing   = (act == AW'(ACT_FIRE));
  assign path_out = {4{step & firing}} & vc_pulse & HAS_NB;

  always_ff @(posedge clk) begin
    if (rst) begin
      act <= INIT_ACTIVE ? AW'(ACT_FIRE) : '0;
    end else if (step) begin
      if (|exc_in)                    act <= AW'(ACT_FIRE);   // excited by a neighbour
      else if (firing && !(|path_out)) act <= AW'(ACT_FIRE);  // self-excitatory loop
      else if (act > AW'(LEAK))       act <= act - AW'(LEAK); // global leak
      else                            act <= '0;
    end
  end
endmodule
