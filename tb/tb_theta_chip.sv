// tb_theta_chip: end-to-end test of a reduced theta chip (8 units, no
// unit-to-unit variation).  It runs the start-up sequence on the common pins,
// keeping all 8 phases of unit 0 and phase 0 of unit 1 and bypassing the rest,
// then checks: the scan cycle is 9 clocks long; with Cap_clear held the serial
// stream shows the phase-0 pattern of the eight taps; and the oscillations
// rebuilt from the serial stream have the frequencies of equation (1) for
// preferred velocities [4,0] and [-4,0] under input velocity [2,0].
`timescale 1ns/1ps
module tb_theta_chip;
  import nc_pkg::*;
  localparam int NU = 8;
  localparam real FI = 2000.0, BT = 20.0;
  logic clk = 0, cap_clear, osc_out;
  theta_ctrl_t ctrl;
  logic [7:0] vin;
  int checks = 0, failures = 0;

  theta_chip #(.N_UNITS(NU), .F_IDLE_MEAN(FI), .F_IDLE_SD(0.0), .BETA_MEAN(BT), .BETA_SD(0.0)) dut (
    .clk, .ctrl, .vin, .cap_clear, .osc_out);
  always #100 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    #100ms; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [8:0] samp;
  int edges0, edges1;
  logic prev0, prev1;

  initial begin
    ctrl = '{clear: 1'b1, write: 1'b0, bypass: 1'b0, pv: 8'h88};
    vin = 8'h8A;              // input velocity [2,0]
    cap_clear = 1;
    repeat (3) @(posedge clk);
    @(negedge clk);
    ctrl.clear = 0; ctrl.write = 1;
    for (int k = 0; k < NU * 8; k++) begin
      ctrl.bypass = !((k < 8) || (k == 8));
      ctrl.pv = (k / 8 == 0) ? 8'h8C : (k / 8 == 1) ? 8'h84 : 8'h88;
      @(negedge clk);
    end
    ctrl.write = 0;
    // Scan with the oscillators held: slot s is sampled at the end of its cycle.
    for (int cyc = 0; cyc < 4; cyc++) begin
      for (int s = 0; s < 9; s++) begin samp[s] = osc_out; @(negedge clk); end
      chk(samp[7:0] == 8'hE1, "held phase pattern of unit 0 taps");
      chk(samp[8] == 1'b1, "held phase 0 of unit 1");
    end
    // Release and rebuild two oscillations from slots 0 and 8.
    cap_clear = 0;
    edges0 = 0; edges1 = 0; prev0 = 1; prev1 = 1;
    for (int cyc = 0; cyc < 20000; cyc++) begin   // 20000 * 9 * 200 ns = 36 ms
      for (int s = 0; s < 9; s++) begin
        if (s == 0) begin if (osc_out && !prev0) edges0++; prev0 = osc_out; end
        if (s == 8) begin if (osc_out && !prev1) edges1++; prev1 = osc_out; end
        @(negedge clk);
      end
    end
    $display("unit0 %0d rising edges (expect ~%0d), unit1 %0d (expect ~%0d)",
             edges0, int'(0.036 * (FI + 8 * BT)), edges1, int'(0.036 * (FI - 8 * BT)));
    chk(edges0 >= int'(0.036 * (FI + 8 * BT)) - 2 && edges0 <= int'(0.036 * (FI + 8 * BT)) + 2, "unit 0 frequency");
    chk(edges1 >= int'(0.036 * (FI - 8 * BT)) - 2 && edges1 <= int'(0.036 * (FI - 8 * BT)) + 2, "unit 1 frequency");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
