// place_cell_network: the GRID x GRID sheet of place cells that integrates the
// vector-cell firings into an absolute position.
//
// Each place cell is linked to its four neighbours only through path cells
// gated by the four cardinal vector cells (E, W, N, S), as in the paper; there
// are no direct place-to-place weights.  A rising edge of a vector-cell level
// is one firing: it produces a one-clock `step` with the firing direction(s),
// and the activity bump moves one cell in that direction (see place_cell).
// Columns grow to the east and rows to the south; the bump starts at the centre
// cell after reset.  Outputs: every cell's activity, the bump's row/column
// (the firing cell; if none fires, the last known position is kept) and a
// `moved` pulse.  If two vector cells rise in the same clock both path cells
// fire in the same event; this, like the centre start, is this design's choice.
`timescale 1ns/1ps
module place_cell_network #(
  parameter int unsigned GRID     = 11,
  parameter int unsigned AW       = 4,
  parameter int unsigned ACT_FIRE = 10,
  parameter int unsigned LEAK     = 5
) (
  input  logic                          clk,
  input  logic                          rst,
  input  logic [3:0]                    vec,       // vector-cell levels, index dir_e
  output logic [GRID*GRID*AW-1:0]       act,       // cell (r,c) at (r*GRID+c)*AW
  output logic [$clog2(GRID)-1:0]       bump_row,
  output logic [$clog2(GRID)-1:0]       bump_col,
  output logic                          moved
);
  import nc_pkg::*;
  localparam int unsigned GW = $clog2(GRID);
  localparam int unsigned NC = GRID * GRID;
  localparam int unsigned C0 = GRID / 2;

  logic [3:0]    vec_q, rise;
  logic          step;
  logic [3:0]    path  [NC];
  logic [3:0]    exc   [NC];
  logic [NC-1:0] firing;

  always_ff @(posedge clk) begin
    if (rst) vec_q <= '0;
    else     vec_q <= vec;
  end
  assign rise = vec & ~vec_q;
  assign step = |rise;

  for (genvar r = 0; r < GRID; r++) begin : g_row
    for (genvar c = 0; c < GRID; c++) begin : g_col
      localparam int unsigned K = r * GRID + c;
      localparam logic [3:0] NB = {(r < GRID - 1), (r > 0), (c > 0), (c < GRID - 1)};
      // Excitation arriving from the neighbour on each side: the neighbour to
      // the west fires its east path cell into this cell, and so on.
      assign exc[K][DIR_E] = (c > 0)        ? path[K - 1][DIR_E]    : 1'b0;
      assign exc[K][DIR_W] = (c < GRID - 1) ? path[K + 1][DIR_W]    : 1'b0;
      assign exc[K][DIR_N] = (r < GRID - 1) ? path[K + GRID][DIR_N] : 1'b0;
      assign exc[K][DIR_S] = (r > 0)        ? path[K - GRID][DIR_S] : 1'b0;

      place_cell #(.AW(AW), .ACT_FIRE(ACT_FIRE), .LEAK(LEAK), .HAS_NB(NB),
                   .INIT_ACTIVE(r == C0 && c == C0)) u_cell (
        .clk, .rst, .step, .vc_pulse(rise), .exc_in(exc[K]),
        .path_out(path[K]), .act(act[K*AW +: AW]), .firing(firing[K])
      );
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      bump_row <= GW'(C0);
      bump_col <= GW'(C0);
      moved    <= 1'b0;
    end else begin
      moved <= step;
      for (int k = 0; k < NC; k++) begin
        if (firing[k]) begin
          bump_row <= GW'(k / GRID);
          bump_col <= GW'(k % GRID);
        end
      end
    end
  end
endmodule
