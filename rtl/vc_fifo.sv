// vc_fifo: FIFO that buffers the vector-cell outputs for streaming to the host.
//
// The paper only says the network output is buffered in a FIFO queue; width,
// depth and policy are this design's choices.  One word is pushed per scan
// frame; the host side pops with a valid/ready handshake (`rd_valid` high
// while the FIFO holds data, a word leaves on a clock with rd_valid and
// rd_ready both high).  A push into a full FIFO is dropped and sets the sticky
// `overflow` flag, which `rst` clears.  Storage is a simple dual-port array
// (first-word fall-through: rd_data shows the head word combinationally).
`timescale 1ns/1ps
module vc_fifo #(
  parameter int unsigned W     = 4,
  parameter int unsigned DEPTH = 512
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     wr_en,
  input  logic [W-1:0]             wr_data,
  input  logic                     rd_ready,
  output logic                     rd_valid,
  output logic [W-1:0]             rd_data,
  output logic                     full,
  output logic                     overflow,
  output logic [$clog2(DEPTH):0]   count
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic          do_wr, do_rd;

  assign full     = (count == (AW+1)'(DEPTH));
  assign rd_valid = (count != '0);
  assign rd_data  = mem[rp];
  assign do_wr    = wr_en && !full;
  assign do_rd    = rd_ready && rd_valid;

  always_ff @(posedge clk) begin
    if (do_wr) mem[wp] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wp       <= '0;
      rp       <= '0;
      count    <= '0;
      overflow <= 1'b0;
    end else begin
      if (do_wr) wp <= (32'(wp) == DEPTH - 1) ? '0 : wp + 1'b1;
      if (do_rd) rp <= (32'(rp) == DEPTH - 1) ? '0 : rp + 1'b1;
      count <= count + (AW+1)'(do_wr) - (AW+1)'(do_rd);
      if (wr_en && full) overflow <= 1'b1;
    end
  end

  a_no_underflow: assert property (@(posedge clk) disable iff (rst)
                                   count <= (AW+1)'(DEPTH));
endmodule
