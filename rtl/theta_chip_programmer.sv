// theta_chip_programmer: FPGA-side start-up sequencer for the theta chip.
//
// The paper's start-up procedure: hold Clear for a few clocks, then with Write
// high present, clock by clock, the Bypass bit of each of the 1024 arbiter
// stages (unit u, phase p at stage 8u+p) and, at the first stage of each unit,
// that unit's Preferred Velocity byte.  The values come from two small
// configuration memories that the host fills beforehand: pv_mem[u] (PV byte)
// and byp_mem[u] (bit p = bypass phase p of unit u, 1 = not scanned).
//
// Timing: `start` (one clock) begins the sequence.  ctrl.clear is high for
// CLEAR_CYCLES clocks (and whenever rst is high, so the chip is cleared from the
// very first clock).  The next N_UNITS*N_PH clocks carry Write=1 and the data for
// stage 0, 1, 2, ...; ctrl is registered so that the data for stage k is stable
// during the cycle in which the chip's token sits in stage k.  In the cycle
// after the last programming clock the token has wrapped to the first kept
// stage: `scan_start` is high for that one cycle, marking scan slot 0, and
// `done` stays high afterwards.  Host writes to the memories are ignored while
// `busy`.  CLEAR_CYCLES = 4 and the memory layout are this design's choices.
`timescale 1ns/1ps
module theta_chip_programmer #(
  parameter int unsigned N_UNITS      = 128,
  parameter int unsigned N_PH         = 8,
  parameter int unsigned CLEAR_CYCLES = 4
) (
  input  logic                        clk,
  input  logic                        rst,
  // host configuration port
  input  logic                        cfg_we,
  input  logic                        cfg_sel,    // 0: PV byte, 1: bypass byte
  input  logic [$clog2(N_UNITS)-1:0]  cfg_addr,
  input  logic [7:0]                  cfg_data,
  input  logic                        start,
  // to the theta chip
  output nc_pkg::theta_ctrl_t         ctrl,
  output logic                        busy,
  output logic                        done,
  output logic                        scan_start
);
  import nc_pkg::*;
  localparam int unsigned N  = N_UNITS * N_PH;
  localparam int unsigned SW = $clog2(N + 1);
  localparam int unsigned PW = $clog2(N_PH);

  typedef enum logic [1:0] {S_IDLE, S_CLEAR, S_PROG, S_DONE} state_e;

  logic [7:0]        pv_mem  [N_UNITS];
  logic [N_PH-1:0]   byp_mem [N_UNITS];
  state_e            state;
  logic [SW-1:0]     cnt;
  logic              clear_q, write_q, bypass_q;
  logic [7:0]        pv_q;

  always_ff @(posedge clk) begin
    if (cfg_we && !busy) begin
      if (cfg_sel) byp_mem[cfg_addr] <= cfg_data[N_PH-1:0];
      else         pv_mem[cfg_addr]  <= cfg_data;
    end
  end

  // Stage k = cnt: unit k/N_PH, phase k%N_PH.
  function automatic logic [$clog2(N_UNITS)-1:0] unit_of(input logic [SW-1:0] k);
    return k[PW +: $clog2(N_UNITS)];
  endfunction

  always_ff @(posedge clk) begin
    scan_start <= 1'b0;
    if (rst) begin
      state    <= S_IDLE;
      cnt      <= '0;
      clear_q  <= 1'b1;
      write_q  <= 1'b0;
      bypass_q <= 1'b0;
      pv_q     <= {VEL_ZERO, VEL_ZERO};
    end else begin
      case (state)
        S_IDLE: if (start) begin
          state   <= S_CLEAR;
          cnt     <= '0;
          clear_q <= 1'b1;
          write_q <= 1'b0;
        end
        S_CLEAR: begin
          if (cnt == SW'(CLEAR_CYCLES - 1)) begin
            state    <= S_PROG;
            cnt      <= '0;
            clear_q  <= 1'b0;
            write_q  <= 1'b1;
            bypass_q <= byp_mem[0][0];
            pv_q     <= pv_mem[0];
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        S_PROG: begin
          if (cnt == SW'(N - 1)) begin
            state      <= S_DONE;
            write_q    <= 1'b0;
            bypass_q   <= 1'b0;
            scan_start <= 1'b1;
          end else begin
            bypass_q <= byp_mem[unit_of(cnt + 1'b1)][PW'(cnt + 1'b1)];
            pv_q     <= pv_mem[unit_of(cnt + 1'b1)];
          end
          cnt <= cnt + 1'b1;
        end
        S_DONE: if (start) begin
          state   <= S_CLEAR;
          cnt     <= '0;
          clear_q <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    ctrl.clear  = clear_q | rst;
    ctrl.write  = write_q;
    ctrl.bypass = bypass_q;
    ctrl.pv     = pv_q;
  end
  assign busy = (state == S_CLEAR) || (state == S_PROG);
  assign done = (state == S_DONE);
endmodule
