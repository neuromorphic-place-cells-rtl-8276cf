// tb_ring_oscillator: checks the oscillator model's frequency against
// F = F_IDLE + BETA * i_dot for several inputs, the 1/8-period spacing of the
// eight taps, and that Cap_clear holds the ring at phase 0.
`timescale 1ns/1ps
module tb_ring_oscillator;
  real        i_dot;
  logic       cap_clear;
  logic [7:0] phase;
  int checks = 0, failures = 0;
  localparam real FI = 2000.0, BT = 20.0;

  ring_oscillator #(.F_IDLE(FI), .BETA(BT), .STEP_NS(1000.0)) dut (.i_dot, .cap_clear, .phase);

  // time of the last rising edge of each tap
  realtime last_rise [8];
  realtime first0;
  int      n0;
  logic [7:0] prev = 8'hE1;
  always @(phase) begin
    for (int k = 0; k < 8; k++)
      if (phase[k] && !prev[k]) begin
        last_rise[k] = $realtime;
        if (k == 0) begin
          if (n0 == 0) first0 = $realtime;
          n0++;
        end
      end
    prev = phase;
  end

  task automatic measure(input real d);
    real f_meas, f_exp, t_per;
    i_dot = d; cap_clear = 0;
    #2ms;
    n0 = 0;
    #20ms;
    t_per = (last_rise[0] - first0) / (n0 - 1);
    f_meas = 1.0e9 / t_per;
    f_exp = FI + BT * d;
    checks++;
    if (f_meas > f_exp * 1.01 || f_meas < f_exp * 0.99) begin
      failures++;
      $display("FAIL i_dot=%f: f=%f expected %f", d, f_meas, f_exp);
    end else $display("i_dot=%f f=%f (expected %f)", d, f_meas, f_exp);
    // tap k rises k/8 period after tap 0 (modulo a period)
    for (int k = 1; k < 8; k++) begin
      real lag, el;
      lag = (last_rise[k] - last_rise[0]) / t_per;
      lag = lag - $floor(lag);
      el  = k / 8.0;
      checks++;
      if (lag > el + 0.02 || lag < el - 0.02) begin
        failures++;
        $display("FAIL tap %0d lag %f expected %f", k, lag, el);
      end
    end
  endtask

  initial begin
    #200ms; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cap_clear = 1; i_dot = 0.0;
    #10us;
    checks++;
    if (phase !== 8'hE1) begin failures++; $display("FAIL held phase %b", phase); end
    measure(0.0);
    measure(8.0);
    measure(-8.0);
    measure(16.0);
    // hold: output frozen at the phase-0 pattern
    cap_clear = 1; #5us;
    for (int i = 0; i < 20; i++) begin
      #37us; checks++;
      if (phase !== 8'hE1) begin failures++; $display("FAIL hold %b", phase); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
