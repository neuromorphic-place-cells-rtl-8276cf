// interference_node: one node of the vector-cell network.
//
// The node ANDs two oscillations (the paper's "interference" operation) and
// low-pass filters the product to keep only the difference-frequency term of
// equation (3).  The filter is the paper's: a 9-tap FIR, a Hamming window in
// layer 1 or a moving average in layer 2, followed by a digitized RC stage
// (first-order recursive filter), all pipelined and advanced once per scan
// frame (`en`).  The filtered value is compared with THRESH to give a binary
// "effective theta cell" that the next layer ANDs again.
//
// Numbers chosen by this design: Hamming taps 0.54-0.46cos(2*pi*n/8) scaled by
// 64 and rounded (5,12,29,49,64,49,29,12,5, sum 254); moving-average taps 28
// (sum 252); RC stage y += (x - y) >>> RC_SHIFT (time constant 2^RC_SHIFT
// frames, RC_SHIFT larger in layer 2 as the paper asks); threshold 64, about a
// quarter of full scale, i.e. the node is high while the two inputs overlap for
// more than a quarter of their period.  `clr` (driven by the phase reset)
// empties the filter.  Latency: a change at the inputs reaches `y` after 3
// enabled frames plus the filter's own delay.
`timescale 1ns/1ps
module interference_node #(
  parameter nc_pkg::fir_kind_e FIR      = nc_pkg::FIR_HAMMING,
  parameter int unsigned       RC_SHIFT = 2,
  parameter int unsigned       THRESH   = 64
) (
  input  logic clk,
  input  logic rst,
  input  logic clr,
  input  logic en,
  input  logic a,
  input  logic b,
  output logic y
);
  import nc_pkg::*;
  localparam int unsigned W = 10;   // filter word, holds 0..255 with margin

  function automatic logic [6:0] coef(input logic [3:0] n);
    logic [6:0] ham [9];
    ham = '{7'd5, 7'd12, 7'd29, 7'd49, 7'd64, 7'd49, 7'd29, 7'd12, 7'd5};
    return (FIR == FIR_HAMMING) ? ham[n] : 7'd28;
  endfunction

  logic [8:0]   taps;     // last 9 AND results
  logic [W-1:0] fir_q;    // FIR output register
  logic [W-1:0] rc_q;     // RC state
  logic [W-1:0] fir_d;

  always_comb begin
    fir_d = '0;
    for (int n = 0; n < 9; n++)
      if (taps[n]) fir_d = fir_d + W'(coef(4'(n)));
  end

  always_ff @(posedge clk) begin
    if (rst || clr) begin
      taps  <= '0;
      fir_q <= '0;
      rc_q  <= '0;
      y     <= 1'b0;
    end else if (en) begin
      taps  <= {taps[7:0], a & b};
      fir_q <= fir_d;
      rc_q  <= W'($signed({1'b0, rc_q}) +
                  (($signed({1'b0, fir_q}) - $signed({1'b0, rc_q})) >>> RC_SHIFT));
      y     <= (32'(rc_q) >= THRESH);
    end
  end
endmodule
