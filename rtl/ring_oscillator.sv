// ring_oscillator: behavioural model of the current-starved ring oscillator of
// a theta unit.
//
// Behavioural model (not synthesizable): it stands for a 9-stage current-starved
// inverter ring with load capacitors.  The model integrates phase in fixed time
// steps of STEP_NS:
//     f = F_IDLE + BETA * i_dot          (equation (1) of the paper, clamped at 0)
//     phase += f * STEP
// and drives 8 square-wave taps with ~50% duty, tap k lagging tap 0 by k/8 of a
// period (0.25*pi steps, as the paper measured).  While cap_clear is high the
// ring is held and the phase is forced to 0, which is the phase reset.
// F_IDLE and BETA default to the chip's measured means (2023.771 Hz and
// 20.802 Hz per unit inner product).  The tap order and the held phase are this
// model's choices.
`timescale 1ns/1ps
module ring_oscillator #(
  parameter real F_IDLE  = 2023.771,
  parameter real BETA    = 20.802,
  parameter real STEP_NS = 1000.0
) (
  input  real        i_dot,
  input  logic       cap_clear,
  output logic [7:0] phase
);
  real ph;   // phase in cycles, kept in [0,1)

  function automatic logic [7:0] taps(input real p);
    logic [7:0] t;
    for (int k = 0; k < 8; k++) begin
      real q;
      q = p - real'(k) / 8.0;
      q = q - $floor(q);
      t[k] = (q < 0.5);
    end
    return t;
  endfunction

  initial begin
    ph    = 0.0;
    phase = taps(0.0);
  end

  always begin
    real f;
    #(STEP_NS);
    if (cap_clear) begin
      ph = 0.0;
    end else begin
      f  = F_IDLE + BETA * i_dot;
      if (f < 0.0) f = 0.0;
      ph = ph + f * STEP_NS * 1.0e-9;
      ph = ph - $floor(ph);
    end
    phase = taps(ph);
  end
endmodule
