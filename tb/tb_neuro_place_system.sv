// tb_neuro_place_system: end-to-end run of the whole system at reduced size.
//
// Configuration: 8 theta units in two groups of four (a: +x, b: -x, c: +y,
// d: -y, preferred speed 4), identical units (no variation), 8-input networks,
// 22 scanned phases (one unit per group keeps all 8 phases, the others keep
// phase 0, the paper's 1-in-4 arrangement).  The scan clock is 600 kHz so that
// a frame (22 slots) lasts 36.7 us, the paper's 27.27 kHz frame rate.
//
// Lookup tables: each network pairs a/b and c/d of each group; the E cell takes
// tap 3 of group 0's a unit (3/8 period behind), the W cell tap 5, the N and S
// cells taps 3 and 5 of group 1's c unit, all other inputs phase 0.  After a
// phase reset, moving east slides a against b until the E cell's pairs
// overlap, so the E cell fires first; the firing resets the phases and moves
// the place-cell bump one cell east.
//
// The test drives a trail (E, N, W, S, then E again), and checks: the chip is
// programmed and scans 22 slots per frame (bypass used); each velocity makes
// only the matching vector cell fire, and at least twice; every firing causes
// a phase reset and one bump step in that direction; velocity changes and the
// trail start cause resets; the FIFO stream matches the vector cells and
// overflows while the host stops reading.  Every mechanism is counted and a
// mechanism that never happened is a failure.
`timescale 1ns/1ps
module tb_neuro_place_system;
  import nc_pkg::*;
  localparam int NU = 8, NS = 22, NI = 8, G = 11;
  localparam realtime TCLK = 1666.667ns;

  logic clk = 0, rst;
  logic cfg_we, cfg_sel, cfg_start, cfg_done, lut_we, trail_start, vel_we, rd_ready;
  logic [2:0] cfg_addr;
  logic [7:0] cfg_data, vel_data;
  logic [1:0] lut_net;
  logic [4:0] lut_addr;
  mux_lut_t lut_data;
  logic rd_valid, fifo_overflow, cap_clear, frame_stb, bump_moved, theta_osc, scan_sync;
  logic [3:0] rd_data, vec, reset_cause;
  logic [G*G*4-1:0] place_act;
  logic [3:0] bump_row, bump_col;
  int checks = 0, failures = 0;

  neuro_place_system #(
    .N_UNITS(NU), .N_SLOTS(NS), .N_NET_IN(NI), .GRID(G), .FIFO_DEPTH(64), .HOLD_CYCLES(6),
    .F_IDLE_MEAN(2000.0), .F_IDLE_SD(0.0), .BETA_MEAN(20.8), .BETA_SD(0.0)
  ) dut (.*);
  always #(TCLK / 2) clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 30) $display("FAIL %s at %0t", what, $time); end
  endtask

  // ---------------- monitors ----------------
  int fires [4], moves [4], rst_vec, rst_vel, rst_start, frames, stb_gap_bad, fifo_words, fifo_bad;
  int last_stb = -1, cyc = 0;
  logic [3:0] vec_q = 0;
  int exp_r = G / 2, exp_c = G / 2;
  logic cap_q = 0;
  logic [3:0] vec_hist [$];
  always @(posedge clk) begin
    cyc++;
    if (!rst) begin
      for (int d = 0; d < 4; d++) if (vec[d] && !vec_q[d]) begin
        fires[d]++;
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
      if (frame_stb) begin
        frames++;
        if (last_stb >= 0 && cyc - last_stb != NS) stb_gap_bad++;
        last_stb = cyc;
      end
      // expected FIFO stream: the word pushed when the FIFO had room
      if (dut.push && !dut.u_fifo.full) vec_hist.push_back(vec);
      if (rd_valid && rd_ready) begin
        fifo_words++;
        if (vec_hist.size() == 0 || rd_data != vec_hist[0]) fifo_bad++;
        if (vec_hist.size() != 0) void'(vec_hist.pop_front());
      end
    end
  end
  int dir_now = -1, wrong_dir = 0;
  always @(posedge clk) if (!rst && dir_now >= 0)
    for (int d = 0; d < 4; d++) if (vec[d] && !vec_q[d] && d != dir_now) wrong_dir++;

  // ---------------- host tasks ----------------
  task automatic cfg(input bit sel, input int addr, input logic [7:0] data);
    @(negedge clk); cfg_we = 1; cfg_sel = sel; cfg_addr = 3'(addr); cfg_data = data;
    @(negedge clk); cfg_we = 0;
  endtask
  task automatic lut(input int net, input int slot, input int pos);
    @(negedge clk); lut_we = 1; lut_net = 2'(net); lut_addr = 5'(slot);
    lut_data.valid = (pos >= 0); lut_data.pos = 7'(pos < 0 ? 0 : pos);
    @(negedge clk); lut_we = 0;
  endtask
  // slot of a unit's tap in the scan order (group 0 keeps a's 8 phases,
  // group 1 keeps c's 8 phases)
  function automatic int slot_of(input int u, input int tap);
    case (u)
      0: return tap;  1: return 8;  2: return 9;  3: return 10;
      4: return 11;   5: return 12; 6: return 13 + tap; 7: return 21;
      default: return -1;
    endcase
  endfunction
  task automatic set_vel(input int vx, input int vy, input int d);
    @(negedge clk); vel_we = 1; vel_data = {4'(vy + 8), 4'(vx + 8)};
    @(negedge clk); vel_we = 0; dir_now = d;
  endtask

  initial begin
    #400ms; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int f0 [4];
  initial begin
    rst = 1; cfg_we = 0; cfg_sel = 0; cfg_addr = 0; cfg_data = 0; cfg_start = 0;
    lut_we = 0; lut_net = 0; lut_addr = 0; lut_data = '0; trail_start = 0;
    vel_we = 0; vel_data = 8'h88; rd_ready = 1;
    repeat (4) @(negedge clk); rst = 0;
    // chip configuration: PV bytes and bypass bytes
    for (int g = 0; g < 2; g++) begin
      cfg(0, 4*g+0, 8'h8C); cfg(0, 4*g+1, 8'h84); cfg(0, 4*g+2, 8'hC8); cfg(0, 4*g+3, 8'h48);
      cfg(1, 4*g+0, (g == 0) ? 8'h00 : 8'hFE);
      cfg(1, 4*g+1, 8'hFE);
      cfg(1, 4*g+2, (g == 1) ? 8'h00 : 8'hFE);
      cfg(1, 4*g+3, 8'hFE);
    end
    // lookup tables
    for (int n = 0; n < 4; n++) for (int s = 0; s < NS; s++) lut(n, s, -1);
    for (int n = 0; n < 4; n++) begin
      int ka, kc;
      ka = (n == 0) ? 3 : (n == 1) ? 5 : 0;
      kc = (n == 2) ? 3 : (n == 3) ? 5 : 0;
      lut(n, slot_of(0, ka), 0); lut(n, slot_of(1, 0), 1); lut(n, slot_of(2, 0), 2); lut(n, slot_of(3, 0), 3);
      lut(n, slot_of(4, 0), 4); lut(n, slot_of(5, 0), 5); lut(n, slot_of(6, kc), 6); lut(n, slot_of(7, 0), 7);
    end
    @(negedge clk); cfg_start = 1; @(negedge clk); cfg_start = 0;
    while (!cfg_done) @(negedge clk);
    chk(1, "programmed");
    repeat (5 * NS) @(negedge clk);
    @(negedge clk); trail_start = 1; @(negedge clk); trail_start = 0;
    // the trail
    for (int leg = 0; leg < 5; leg++) begin
      int d, vx, vy;
      d = (leg == 0 || leg == 4) ? 0 : (leg == 1) ? 2 : (leg == 2) ? 1 : 3;
      vx = (d == 0) ? 2 : (d == 1) ? -2 : 0;
      vy = (d == 2) ? 2 : (d == 3) ? -2 : 0;
      for (int k = 0; k < 4; k++) f0[k] = fires[k];
      set_vel(vx, vy, d);
      if (leg == 2) begin
        // host stops reading for a while: the FIFO fills and overflows
        rd_ready = 0;
        #4ms;
        rd_ready = 1;
        #2ms;
      end else #6ms;
      $display("leg %0d dir %0d: firings E%0d W%0d N%0d S%0d, bump at (%0d,%0d)", leg, d,
               fires[0]-f0[0], fires[1]-f0[1], fires[2]-f0[2], fires[3]-f0[3], bump_row, bump_col);
      chk(fires[d] - f0[d] >= 2, "matching vector cell fires repeatedly");
      chk(bump_row == 4'(exp_r) && bump_col == 4'(exp_c), "bump follows the integrated firings");
    end
    set_vel(0, 0, -1);
    #3ms;
    $display("frames %0d, resets: start %0d velocity %0d vector %0d, fifo words %0d, overflow %0d",
             frames, rst_start, rst_vel, rst_vec, fifo_words, fifo_overflow);
    chk(wrong_dir == 0, "only the matching vector cell fires");
    chk(stb_gap_bad == 0 && frames > 100, "bypass: one frame every 22 scan clocks");
    chk(rst_start >= 1, "phase reset at trail start");
    chk(rst_vel >= 5, "phase reset at velocity change");
    chk(rst_vec >= 8, "phase reset at vector-cell firing");
    for (int d = 0; d < 4; d++) chk(fires[d] >= 2, "every direction fired");
    chk(fifo_overflow, "FIFO overflowed while not read");
    chk(fifo_words > 100, "FIFO streamed words");
    chk(fifo_bad == 0, "FIFO words equal the vector cells of each frame");
    // place map: bump 10 at the position, at most one 5
    begin
      int n10, n5;
      n10 = 0; n5 = 0;
      for (int k = 0; k < G * G; k++) begin
        if (place_act[k*4 +: 4] == 10) n10++;
        if (place_act[k*4 +: 4] == 5) n5++;
      end
      chk(n10 == 1 && n5 <= 1, "single bump with tail");
      chk(place_act[(exp_r*G+exp_c)*4 +: 4] == 10, "bump at the integrated position");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
