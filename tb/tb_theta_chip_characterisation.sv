// tb_theta_chip_characterisation: the chip-level characterisation experiment
// on the full system at its default size (128 units, 6 MHz scan clock).
//
// Every unit is programmed with preferred velocity [4,0] and only its phase-0
// tap is scanned (128 slots per scan).  For input velocities x = -4, -2, 0, 2,
// 4 (inner products -16 ... 16) the host rebuilds each unit's oscillation from
// the serial output and measures its frequency over 1000 scans (21 ms).  A
// straight line F = F_idle + beta * (V . Vp) is fitted per unit.  The test
// checks that the fits are linear (coefficient of determination above 0.9, the
// selection rule used before building networks), that the population mean and
// spread of F_idle and beta match the chip statistics the model is built from
// (2023.771 / 374.611 Hz and 20.802 / 3.688 Hz per unit inner product, within
// sampling error), and prints the idle-frequency range.
`timescale 1ns/1ps
module tb_theta_chip_characterisation;
  import nc_pkg::*;
  localparam int NU = 128, NP = 5, G = 11;
  localparam realtime TCLK = 166.667ns;

  logic clk = 0, rst;
  logic cfg_we, cfg_sel, cfg_start, cfg_done, lut_we, trail_start, vel_we, rd_ready;
  logic [6:0] cfg_addr;
  logic [7:0] cfg_data, vel_data, lut_addr;
  logic [1:0] lut_net;
  mux_lut_t lut_data;
  logic rd_valid, fifo_overflow, cap_clear, frame_stb, bump_moved, theta_osc, scan_sync;
  logic [3:0] rd_data, vec, reset_cause;
  logic [G*G*4-1:0] place_act;
  logic [3:0] bump_row, bump_col;
  int checks = 0, failures = 0;

  neuro_place_system dut (.*);
  always #(TCLK / 2) clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 30) $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic cfg(input bit sel, input int addr, input logic [7:0] data);
    @(negedge clk); cfg_we = 1; cfg_sel = sel; cfg_addr = 7'(addr); cfg_data = data;
    @(negedge clk); cfg_we = 0;
  endtask
  task automatic set_vel(input int vx, input int vy);
    @(negedge clk); vel_we = 1; vel_data = {4'(vy + 8), 4'(vx + 8)};
    @(negedge clk); vel_we = 0;
  endtask
  task automatic program_chip();
    @(negedge clk); cfg_start = 1; @(negedge clk); cfg_start = 0;
    while (!cfg_done) @(negedge clk);
    while (!scan_sync) @(negedge clk);   // this clock is scan slot 0
  endtask

  // frequency of every unit from the serial stream (see the full-size test)
  task automatic measure(output real f [NU]);
    realtime tf [NU], tl [NU];
    int n [NU];
    logic prev [NU];
    for (int u = 0; u < NU; u++) begin n[u] = 0; prev[u] = 1; tf[u] = 0; tl[u] = 0; end
    for (int sc = 0; sc < 1000; sc++)
      for (int u = 0; u < NU; u++) begin
        if (theta_osc && !prev[u]) begin
          if (n[u] == 0) tf[u] = $realtime;
          tl[u] = $realtime; n[u]++;
        end
        prev[u] = theta_osc;
        @(negedge clk);
      end
    for (int u = 0; u < NU; u++) f[u] = (n[u] > 1) ? 1.0e9 * (n[u] - 1) / (tl[u] - tf[u]) : 0.0;
  endtask

  initial begin
    #400ms; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real f [NP][NU];
  real fi [NU], be [NU], r2 [NU];
  initial begin
    rst = 1; cfg_we = 0; cfg_sel = 0; cfg_addr = 0; cfg_data = 0; cfg_start = 0;
    lut_we = 0; lut_net = 0; lut_addr = 0; lut_data = '0; trail_start = 0;
    vel_we = 0; vel_data = 8'h88; rd_ready = 1;
    repeat (4) @(negedge clk); rst = 0;
    for (int u = 0; u < NU; u++) begin cfg(0, u, 8'h8C); cfg(1, u, 8'hFE); end
    for (int p = 0; p < NP; p++) begin
      real fp [NU];
      set_vel(2 * p - 4, 0);
      program_chip();
      measure(fp);
      for (int u = 0; u < NU; u++) f[p][u] = fp[u];
    end
    // least-squares line per unit over inner products d = 4 * (2p - 4)
    begin
      real sfi, sfi2, sb, sb2, mfi, sdfi, mb, sdb, fmin, fmax;
      int good;
      sfi = 0; sfi2 = 0; sb = 0; sb2 = 0; good = 0; fmin = 1.0e9; fmax = 0;
      for (int u = 0; u < NU; u++) begin
        real sx, sy, sxx, sxy, syy, b, a, ssr, sst, d, mean_y;
        sx = 0; sy = 0; sxx = 0; sxy = 0; syy = 0;
        for (int p = 0; p < NP; p++) begin
          d = 4.0 * (2 * p - 4);
          sx += d; sy += f[p][u]; sxx += d * d; sxy += d * f[p][u];
        end
        b = (NP * sxy - sx * sy) / (NP * sxx - sx * sx);
        a = (sy - b * sx) / NP;
        mean_y = sy / NP; ssr = 0; sst = 0;
        for (int p = 0; p < NP; p++) begin
          d = 4.0 * (2 * p - 4);
          ssr += (f[p][u] - a - b * d) ** 2;
          sst += (f[p][u] - mean_y) ** 2;
        end
        fi[u] = a; be[u] = b; r2[u] = (sst > 0) ? 1.0 - ssr / sst : 0.0;
        if (r2[u] > 0.9) good++;
        sfi += a; sfi2 += a * a; sb += b; sb2 += b * b;
        if (a < fmin) fmin = a;
        if (a > fmax) fmax = a;
      end
      mfi = sfi / NU; sdfi = $sqrt(sfi2 / NU - mfi * mfi);
      mb = sb / NU;   sdb = $sqrt(sb2 / NU - mb * mb);
      $display("F_idle: mean %0.1f Hz, sd %0.1f Hz, range %0.0f .. %0.0f Hz", mfi, sdfi, fmin, fmax);
      $display("beta:   mean %0.2f, sd %0.2f Hz per unit inner product", mb, sdb);
      $display("units with R^2 > 0.9: %0d of %0d", good, NU);
      chk(good == NU, "all units linear");
      chk(mfi > 2023.771 * 0.93 && mfi < 2023.771 * 1.07, "mean idle frequency");
      chk(sdfi > 374.611 * 0.8 && sdfi < 374.611 * 1.2, "idle frequency spread");
      chk(mb > 20.802 * 0.93 && mb < 20.802 * 1.07, "mean gain");
      chk(sdb > 3.688 * 0.8 && sdb < 3.688 * 1.2, "gain spread");
      // the fitted line agrees with the zero-velocity measurement
      for (int u = 0; u < NU; u++) chk((fi[u] - f[2][u]) ** 2 < (0.01 * f[2][u] + 5.0) ** 2, "intercept = idle frequency");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
