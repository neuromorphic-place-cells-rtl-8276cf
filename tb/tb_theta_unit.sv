// tb_theta_unit: programs a theta unit's preferred velocity through the SRAM
// port and checks the oscillation frequency against equation (1),
// F = F_idle + beta * (V . Vp), for several preferred/input velocity pairs,
// including the reset (zero) preferred velocity.
`timescale 1ns/1ps
module tb_theta_unit;
  localparam real FI = 2000.0, BT = 20.0, VZ = 0.5, VL = 0.05;
  logic clk = 0, clear, pv_we, cap_clear;
  logic [7:0] pv_bus, phase;
  real vin_x, vin_y;
  int checks = 0, failures = 0;

  theta_unit #(.F_IDLE(FI), .BETA(BT), .V_ZERO(VZ), .V_LSB(VL)) dut (
    .clk, .clear, .pv_we, .pv_bus, .vin_x, .vin_y, .cap_clear, .phase);
  always #100 clk = ~clk;

  int n; realtime t_first, t_last;
  logic p0 = 1'b1;
  always @(phase) begin
    if (phase[0] && !p0) begin
      if (n == 0) t_first = $realtime;
      t_last = $realtime; n++;
    end
    p0 = phase[0];
  end

  task automatic run(input int px, input int py, input int vx, input int vy, input bit do_prog);
    real f, fe;
    if (do_prog) begin
      @(negedge clk); pv_bus = {4'(py + 8), 4'(px + 8)}; pv_we = 1;
      @(negedge clk); pv_we = 0;
    end
    vin_x = VZ + vx * VL; vin_y = VZ + vy * VL;
    #1ms; n = 0; #20ms;
    f  = 1.0e9 * (n - 1) / (t_last - t_first);
    fe = FI + BT * (px * vx + py * vy);
    checks++;
    if (f > fe * 1.01 || f < fe * 0.99) begin
      failures++; $display("FAIL pv=(%0d,%0d) v=(%0d,%0d): f=%f exp %f", px, py, vx, vy, f, fe);
    end
  endtask

  initial begin
    #300ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clear = 1; pv_we = 0; pv_bus = 0; cap_clear = 0; vin_x = VZ; vin_y = VZ;
    repeat (3) @(posedge clk);
    clear = 0;
    run(0, 0, 4, 4, 0);          // cleared SRAM = zero preferred velocity
    run(4, 0, 2, 0, 1);
    run(-4, 0, 2, 0, 1);
    run(0, 4, 3, -2, 1);
    run(-3, 4, -4, 4, 1);
    run(4, 0, 0, 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
