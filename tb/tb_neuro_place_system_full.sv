// tb_neuro_place_system_full: the whole system at its default size (128 theta
// units with the measured spread of idle frequency and gain, 220 scanned
// phases, 80-input networks, 6 MHz scan clock, 11 x 11 place cells).
//
// It follows the experimental procedure:
//  1. Calibration: every unit programmed to zero preferred velocity, phase 0 of
//     all 128 units scanned; the host rebuilds each unit's oscillation from the
//     serial output and measures its idle frequency; a second pass at
//     preferred velocity [4,0] and input velocity [2,0] (inner product 8)
//     gives each unit's gain.
//  2. Configuration: the 80 units in the middle of the frequency ranking are
//     paired with their nearest neighbour in frequency (offset reduction).
//     The 40 pairs are ranked by summed gain: the fastest 10 become the
//     tapped x pairs (even groups), the next 10 the tapped y pairs (odd
//     groups), then the untapped y pairs and, slowest, the untapped x pairs,
//     so that tapped pairs reach their offset before untapped pairs leave
//     their window.  x pairs get preferred velocities [4,0]/[-4,0], y pairs
//     [0,4]/[0,-4]; each group (one x pair, one y pair) forms a layer-2
//     node.  One unit in four keeps all 8 phases (the +x unit in even
//     groups, the +y unit in odd groups): 60 + 8*20 = 220 scanned phases.  The E/W/N/S lookup tables take
//     tap 3 or 5 (3/8 period behind or ahead) of the 8-phase unit in the
//     matching groups, phase 0 elsewhere.
//  3. A trail E, N, W, S at speed 2: the test counts vector-cell firings, phase
//     resets and bump steps, checks that only the vector cell of the current
//     direction fires, that each direction fires, and that the place-cell bump
//     follows the integrated firings.
//  4. The detour of the tracking experiments: north 2, east 4, south 4, west 1
//     cell, each segment held until its cell has fired that often; the bump
//     must end displaced by [3,-2].
`timescale 1ns/1ps
module tb_neuro_place_system_full;
  import nc_pkg::*;
  localparam int NU = 128, NS = 220, G = 11;
  localparam realtime TCLK = 166.667ns;     // 6 MHz scan clock

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

  // ---------------- monitors ----------------
  int fires [4], rst_vec, rst_vel, rst_start, frames, stb_gap_bad, wrong_dir, dir_now = -1;
  bit op = 0;
  int words = 0, hot_words = 0;
  int last_stb = -1, cyc = 0, exp_r = G / 2, exp_c = G / 2;
  logic [3:0] vec_q = 0;
  logic cap_q = 0;
  always @(posedge clk) begin
    cyc++;
    if (!rst) begin
      for (int d = 0; d < 4; d++) if (vec[d] && !vec_q[d]) begin
        fires[d]++;
        if (dir_now >= 0 && d != dir_now) wrong_dir++;
        if (d == 0 && exp_c < G - 1) exp_c++;
        if (d == 1 && exp_c > 0) exp_c--;
        if (d == 2 && exp_r > 0) exp_r--;
        if (d == 3 && exp_r < G - 1) exp_r++;
      end
      vec_q <= vec;
      if (cap_clear && !cap_q) begin
        if (reset_cause[0]) rst_start++;
        if (reset_cause[1]) rst_vel++;
        if (reset_cause[2]) rst_vec++;
      end
      cap_q <= cap_clear;
      if (rd_valid && rd_ready && op) begin
        words++;
        if (rd_data != 0) hot_words++;
      end
      if (frame_stb && op) begin
        frames++;
        if (last_stb >= 0 && cyc - last_stb != NS) begin
          stb_gap_bad++;
          $display("frame gap %0d clocks at %0t", cyc - last_stb, $time);
        end
        last_stb = cyc;
      end
    end
  end

  // ---------------- host tasks ----------------
  task automatic cfg(input bit sel, input int addr, input logic [7:0] data);
    @(negedge clk); cfg_we = 1; cfg_sel = sel; cfg_addr = 7'(addr); cfg_data = data;
    @(negedge clk); cfg_we = 0;
  endtask
  task automatic lut(input int net, input int slot, input int pos);
    @(negedge clk); lut_we = 1; lut_net = 2'(net); lut_addr = 8'(slot);
    lut_data.valid = (pos >= 0); lut_data.pos = 7'(pos < 0 ? 0 : pos);
    @(negedge clk); lut_we = 0;
  endtask
  task automatic program_chip();
    @(negedge clk); cfg_start = 1; @(negedge clk); cfg_start = 0;
    while (!cfg_done) @(negedge clk);
    while (!scan_sync) @(negedge clk);   // this clock is scan slot 0
  endtask
  task automatic set_vel(input int vx, input int vy, input int d);
    @(negedge clk); vel_we = 1; vel_data = {4'(vy + 8), 4'(vx + 8)};
    @(negedge clk); vel_we = 0; dir_now = d;
  endtask

  initial begin
    #200ms; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real fidle [NU], fmove [NU], beta [NU];

  // Rebuild every unit's oscillation from the serial output (phase 0 of all
  // units kept, 128 slots per scan, starting at slot 0) and measure its
  // frequency from the first and last rising edge over 1000 scans (21 ms).
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
  int  order [NU];
  int  role_unit [80];   // group g: [4g] +x, [4g+1] -x, [4g+2] +y, [4g+3] -y
  int  slot_base [NU];   // first scan slot of each unit in operation
  bit  eight [NU];

  initial begin
    rst = 1; cfg_we = 0; cfg_sel = 0; cfg_addr = 0; cfg_data = 0; cfg_start = 0;
    lut_we = 0; lut_net = 0; lut_addr = 0; lut_data = '0; trail_start = 0;
    vel_we = 0; vel_data = 8'h88; rd_ready = 1;
    repeat (4) @(negedge clk); rst = 0;

    // ---- 1. calibration: idle frequency, then gain ----
    for (int u = 0; u < NU; u++) begin cfg(0, u, 8'h88); cfg(1, u, 8'hFE); end
    program_chip();
    measure(fidle);
    for (int u = 0; u < NU; u++) cfg(0, u, 8'h8C);          // PV [4,0]
    set_vel(2, 0, -1);                                        // inner product 8
    program_chip();
    measure(fmove);
    for (int u = 0; u < NU; u++) beta[u] = (fmove[u] - fidle[u]) / 8.0;
    set_vel(0, 0, -1);
    // frequency ranking (insertion sort)
    for (int u = 0; u < NU; u++) order[u] = u;
    for (int i = 1; i < NU; i++)
      for (int j = i; j > 0 && fidle[order[j]] < fidle[order[j-1]]; j--) begin
        int t; t = order[j]; order[j] = order[j-1]; order[j-1] = t;
      end
    $display("calibrated idle frequencies: %f .. %f Hz", fidle[order[0]], fidle[order[NU-1]]);
    chk(fidle[order[0]] > 500.0 && fidle[order[NU-1]] < 4000.0, "calibration plausible");
    begin
      real bmin, bmax;
      bmin = beta[0]; bmax = beta[0];
      for (int u = 1; u < NU; u++) begin
        if (beta[u] < bmin) bmin = beta[u];
        if (beta[u] > bmax) bmax = beta[u];
      end
      $display("calibrated gains: %f .. %f Hz per unit", bmin, bmax);
      chk(bmin > 5.0 && bmax < 40.0, "gain calibration plausible");
    end
    // ---- 2. configuration ----
    // 40 pairs of neighbours in frequency, ranked by summed gain: the fastest
    // pairs take the tapped roles (x in even groups, then y in odd groups), the
    // slowest the untapped roles, so every tapped pair reaches its tap before
    // the untapped pairs leave their window.
    begin
      int pu [40][2];
      real pb [40];
      int rk [40];
      for (int p = 0; p < 40; p++) begin
        pu[p][0] = order[24 + 2*p]; pu[p][1] = order[24 + 2*p + 1];
        pb[p] = beta[pu[p][0]] + beta[pu[p][1]];
        rk[p] = p;
      end
      for (int i = 1; i < 40; i++)
        for (int j = i; j > 0 && pb[rk[j]] > pb[rk[j-1]]; j--) begin
          int t; t = rk[j]; rk[j] = rk[j-1]; rk[j-1] = t;
        end
      $display("pair gain sums: %f .. %f", pb[rk[39]], pb[rk[0]]);
      for (int i = 0; i < 10; i++) begin
        // tapped x (even groups), tapped y (odd groups), untapped y (even), untapped x (odd)
        role_unit[4*(2*i)]       = pu[rk[i]][0];      role_unit[4*(2*i)+1]     = pu[rk[i]][1];
        role_unit[4*(2*i+1)+2]   = pu[rk[10+i]][0];   role_unit[4*(2*i+1)+3]   = pu[rk[10+i]][1];
        role_unit[4*(2*i)+2]     = pu[rk[20+i]][0];   role_unit[4*(2*i)+3]     = pu[rk[20+i]][1];
        role_unit[4*(2*i+1)]     = pu[rk[30+i]][0];   role_unit[4*(2*i+1)+1]   = pu[rk[30+i]][1];
      end
    end
    for (int u = 0; u < NU; u++) eight[u] = 0;
    for (int g = 0; g < 20; g++) eight[role_unit[4*g + ((g % 2) ? 2 : 0)]] = 1;
    for (int u = 0; u < NU; u++) begin cfg(0, u, 8'h88); cfg(1, u, 8'hFF); end
    for (int k = 0; k < 80; k++) begin
      int u;
      u = role_unit[k];
      cfg(0, u, (k % 4 == 0) ? 8'h8C : (k % 4 == 1) ? 8'h84 : (k % 4 == 2) ? 8'hC8 : 8'h48);
      cfg(1, u, eight[u] ? 8'h00 : 8'hFE);
    end
    begin
      int s;
      s = 0;
      for (int u = 0; u < NU; u++) begin
        slot_base[u] = s;
        for (int k = 0; k < 80; k++) if (role_unit[k] == u) s += eight[u] ? 8 : 1;
      end
      chk(s == NS, "220 phases kept");
    end
    for (int n = 0; n < 4; n++) for (int sl = 0; sl < NS; sl++) lut(n, sl, -1);
    for (int n = 0; n < 4; n++)
      for (int k = 0; k < 80; k++) begin
        int u, tap, g;
        u = role_unit[k]; g = k / 4; tap = 0;
        if (eight[u]) begin
          if ((g % 2) == 0 && n == 0) tap = 3;
          if ((g % 2) == 0 && n == 1) tap = 5;
          if ((g % 2) == 1 && n == 2) tap = 3;
          if ((g % 2) == 1 && n == 3) tap = 5;
        end
        lut(n, slot_base[u] + tap, k);
      end
    program_chip();
    op = 1;
    @(negedge clk); trail_start = 1; @(negedge clk); trail_start = 0;
    // ---- 3. trail ----
    for (int leg = 0; leg < 4; leg++) begin
      int d, f0 [4];
      d = (leg == 0) ? 0 : (leg == 1) ? 2 : (leg == 2) ? 1 : 3;
      for (int k = 0; k < 4; k++) f0[k] = fires[k];
      set_vel((d == 0) ? 2 : (d == 1) ? -2 : 0, (d == 2) ? 2 : (d == 3) ? -2 : 0, d);
      #6ms;
      $display("leg %0d dir %0d: firings E%0d W%0d N%0d S%0d, bump at (%0d,%0d)", leg, d,
               fires[0]-f0[0], fires[1]-f0[1], fires[2]-f0[2], fires[3]-f0[3], bump_row, bump_col);
      chk(fires[d] - f0[d] >= 1, "matching vector cell fires");
      chk(bump_row == 4'(exp_r) && bump_col == 4'(exp_c), "bump follows the integrated firings");
    end
    // ---- 4. a detour to [3,-2]: N 2, E 4, S 4, W 1 cells, each segment held
    // until its vector cell has fired that many times ----
    begin
      int r0, c0;
      int seg_d [4] = '{2, 0, 3, 1};
      int seg_n [4] = '{2, 4, 4, 1};
      r0 = int'(bump_row); c0 = int'(bump_col);
      for (int sg = 0; sg < 4; sg++) begin
        int d, f0;
        realtime t0;
        d = seg_d[sg]; f0 = fires[d]; t0 = $realtime;
        set_vel((d == 0) ? 2 : (d == 1) ? -2 : 0, (d == 2) ? 2 : (d == 3) ? -2 : 0, d);
        while (fires[d] - f0 < seg_n[sg] && $realtime - t0 < 20ms) @(negedge clk);
        chk(fires[d] - f0 == seg_n[sg], "detour segment completed");
      end
      set_vel(0, 0, -1);
      repeat (10) @(negedge clk);
      $display("detour: bump from (%0d,%0d) to (%0d,%0d), displacement [%0d,%0d]",
               r0, c0, bump_row, bump_col, int'(bump_col) - c0, r0 - int'(bump_row));
      chk(int'(bump_col) - c0 == 3 && r0 - int'(bump_row) == -2, "detour ends at [3,-2]");
    end
    $display("frames %0d, resets: start %0d velocity %0d vector %0d, wrong-direction firings %0d",
             frames, rst_start, rst_vel, rst_vec, wrong_dir);
    $display("host read %0d vector words, %0d with a cell active", words, hot_words);
    chk(words >= frames - 2 && words <= frames + 2 && !fifo_overflow, "one vector word per frame reaches the host");
    chk(hot_words > 0, "firings reach the host");
    chk(wrong_dir == 0, "only the matching vector cell fires");
    chk(stb_gap_bad == 0 && frames > 500, "one frame per 220 scan clocks");
    chk(rst_start >= 1 && rst_vel >= 3 && rst_vec >= 4, "phase resets from all three causes");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
