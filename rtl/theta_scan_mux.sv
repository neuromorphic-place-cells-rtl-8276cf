// theta_scan_mux: the multiplexer between the theta chip's serial output and
// one vector-cell network.
//
// In operation the theta chip puts one phase per scan clock on its output pin,
// N_SLOTS phases per scan cycle (220 in the paper's configuration).  The mux
// counts slots and, through a lookup table indexed by slot, writes each sample
// to its position in an N_BUF-bit buffer (80 in the paper).  Slots whose entry
// is not valid are dropped.  When the last slot of a cycle has been sampled the
// buffer is copied to `frame` and `frame_stb` pulses for one clock: this is the
// "clock" with which the network loads the buffer and advances.  The table
// contents come from the host, which computes them from calibration (equation
// (4) of the paper); different tables give different vector cells from the
// same 220 phases.
//
// Timing: `start` marks the cycle in which slot 0 is on `osc_in` (the chip
// programmer's scan_start); the sample is taken on the rising edge that ends
// that cycle.  Slots then follow one per clock.  `frame_stb` is high in the
// cycle after the last slot's edge.  A table write takes effect on the next
// scan cycle.  The slot-indexed table layout (valid bit + 7-bit position) is
// this design's choice.
`timescale 1ns/1ps
module theta_scan_mux #(
  parameter int unsigned N_SLOTS = 220,
  parameter int unsigned N_BUF   = 80
) (
  input  logic                        clk,
  input  logic                        rst,
  input  logic                        lut_we,
  input  logic [$clog2(N_SLOTS)-1:0]  lut_addr,
  input  nc_pkg::mux_lut_t            lut_data,
  input  logic                        start,
  input  logic                        osc_in,
  output logic [N_BUF-1:0]            frame,
  output logic                        frame_stb
);
  import nc_pkg::*;
  localparam int unsigned AW = $clog2(N_SLOTS);

  mux_lut_t          lut [N_SLOTS];
  logic [AW-1:0]     slot;
  logic              running;
  logic [N_BUF-1:0]  fill;
  logic [AW-1:0]     cur;
  mux_lut_t          ent;

  always_ff @(posedge clk) begin
    if (lut_we) lut[lut_addr] <= lut_data;
  end

  assign cur = start ? '0 : slot;
  assign ent = lut[cur];

  always_ff @(posedge clk) begin
    frame_stb <= 1'b0;
    if (rst) begin
      running <= 1'b0;
      slot    <= '0;
      fill    <= '0;
      frame   <= '0;
    end else if (start || running) begin
      running <= 1'b1;
      if (ent.valid && (32'(ent.pos) < N_BUF)) fill[ent.pos] <= osc_in;
      if (cur == AW'(N_SLOTS - 1)) begin
        slot      <= '0;
        frame_stb <= 1'b1;
        frame     <= fill;
        if (ent.valid && (32'(ent.pos) < N_BUF)) frame[ent.pos] <= osc_in;
      end else begin
        slot <= cur + 1'b1;
      end
    end
  end
endmodule
