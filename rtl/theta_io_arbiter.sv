// theta_io_arbiter: the shift-register I/O arbiter of the theta chip.
//
// A chain of N_UNITS*N_PH one-bit stages (1024 = 128 units x 8 phases) carries
// a single token.  Stage u*N_PH+p gates phase p of unit u onto the one serial
// output pin (time-division multiplexing), and the first stage of each group
// also enables writing that unit's preferred-velocity SRAM.  Every stage has a
// bypass SRAM bit; a bypassed stage is skipped by the shift path, so after
// configuration a scan cycle visits only the phases that are kept.
//
// Operation, following the paper: Clear (held a few clocks) puts the token in
// stage 0 and clears all bypass bits.  With Write high, each clock stores the
// Bypass input into the stage holding the token and moves the token on, so
// 1024 clocks program every stage (and, on every 8th, a PV byte).  Because the
// bits written so far lie behind the token, the first pass visits all stages;
// from the wrap-around on, bypassed stages are skipped.
//
// This design's choices: bypass bit 1 means "skip this phase"; the chain is a
// ring, the last kept stage handing the token back to the first kept stage;
// osc_out is combinational from the token and the phase inputs (the FPGA
// samples it on the next rising clock).  If every stage is bypassed the token
// is lost until the next Clear.
`timescale 1ns/1ps
module theta_io_arbiter #(
  parameter int unsigned N_UNITS = 128,
  parameter int unsigned N_PH    = 8
) (
  input  logic                       clk,
  input  logic                       clear,
  input  logic                       write,
  input  logic                       bypass_in,
  input  logic [N_UNITS*N_PH-1:0]    phase_in,   // unit u, tap p at u*N_PH+p
  output logic [N_UNITS-1:0]         pv_we,      // PV SRAM write enable per unit
  output logic                       osc_out,    // serial oscillation output
  output logic [N_UNITS*N_PH-1:0]    token       // current stage (one-hot)
);
  localparam int unsigned N = N_UNITS * N_PH;

  logic [N-1:0] byp;      // bypass SRAM
  logic [N-1:0] d;        // value arriving at each stage's input

  // Ripple through bypassed stages.  First pass finds what leaves the end of
  // the chain (wraps to the start); second pass uses it as the chain input.
  always_comb begin
    logic c;
    c = 1'b0;
    for (int i = 0; i < N; i++) c = byp[i] ? c : token[i];
    for (int i = 0; i < N; i++) begin
      d[i] = c;
      c    = byp[i] ? c : token[i];
    end
  end

  always_ff @(posedge clk) begin
    if (clear) begin
      token <= N'(1);
      byp   <= '0;
    end else begin
      for (int i = 0; i < N; i++) begin
        token[i] <= byp[i] ? 1'b0 : d[i];
        if (write && token[i]) byp[i] <= bypass_in;
      end
    end
  end

  always_comb begin
    for (int u = 0; u < N_UNITS; u++) pv_we[u] = write & token[u*N_PH];
  end

  assign osc_out = |(token & phase_in);

  // The token is unique once the chain has been cleared (Clear must be high
  // on the first clock).
  a_onehot: assert property (@(posedge clk) disable iff (clear)
                             (byp == '1) || $onehot(token));
endmodule
