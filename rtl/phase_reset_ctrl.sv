// phase_reset_ctrl: generates the theta chip's Cap_clear (phase reset).
//
// The paper resets the phases of all theta cells at the beginning of a trail,
// whenever the input velocity changes, and whenever any vector cell fires,
// which ends one tracking segment; the reset procedure it builds on also allows
// a reset at a fixed interval while the velocity is constant.  This block
// turns each such event into a Cap_clear pulse of HOLD_CYCLES clocks:
//   trail_start  one-clock pulse from the host
//   vel_change   one-clock pulse when a new velocity is loaded
//   vec          vector-cell levels; a rising edge of any of them is a firing
//   interval     every RESET_INTERVAL clocks without another reset (0 = off)
// `cause` records which events started the current pulse (bit 0 start, 1
// velocity, 2 vector cell, 3 interval).  The pulse length and the interval are
// not given in the paper; HOLD_CYCLES = 64 (about 11 us at a 6 MHz scan clock)
// is this design's choice, and the interval reset is off by default because the
// paper's tracking experiments use only the first three events.
`timescale 1ns/1ps
module phase_reset_ctrl #(
  parameter int unsigned N_VEC          = 4,
  parameter int unsigned HOLD_CYCLES    = 64,
  parameter int unsigned RESET_INTERVAL = 0
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             trail_start,
  input  logic             vel_change,
  input  logic [N_VEC-1:0] vec,
  output logic             cap_clear,
  output logic [3:0]       cause
);
  logic [N_VEC-1:0] vec_q;
  logic [15:0]      hold;
  logic [31:0]      since;
  logic [3:0]       ev;

  always_comb begin
    ev[0] = trail_start;
    ev[1] = vel_change;
    ev[2] = |(vec & ~vec_q);
    ev[3] = (RESET_INTERVAL != 0) && (since == RESET_INTERVAL - 1);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      vec_q     <= '0;
      hold      <= '0;
      since     <= '0;
      cap_clear <= 1'b0;
      cause     <= '0;
    end else begin
      vec_q <= vec;
      if (|ev) begin
        hold      <= 16'(HOLD_CYCLES - 1);
        cap_clear <= 1'b1;
        cause     <= cap_clear ? (cause | ev) : ev;
        since     <= '0;
      end else if (cap_clear) begin
        if (hold == '0) cap_clear <= 1'b0;
        else            hold <= hold - 1'b1;
        since <= '0;
      end else begin
        since <= since + 1'b1;
      end
    end
  end
endmodule
