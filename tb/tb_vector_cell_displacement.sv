// tb_vector_cell_displacement: a vector cell responds to displacement, not to
// elapsed time, and only in its own direction.
//
// The system is configured as a small version of the standard arrangement (8
// theta units: two groups of +x/-x/+y/-y units, 22 scanned phases, 8-input
// networks, frames at the full-size 27.27 kHz rate, no unit spread).  Only the
// east network is given a table: tap 3 (3/8 of a period late) of the +x unit
// of group 0, tap 0 of everything else.  The agent then moves east at speeds
// 1, 2 and 3 from a phase reset, and the test measures the time to the first
// firing.  A cell that encodes a displacement, unlike a timer, fires sooner
// when the agent is faster (the times are quantised by the oscillation period
// and include the filter lag, so they follow 1/v only roughly).  The cell must
// stay silent when standing still or moving north or south.  Moving west it aliases once the phases
// have slipped about two thirds of a cycle; in the full system the west cell
// fires and resets first, so this case is only reported.
`timescale 1ns/1ps
module tb_vector_cell_displacement;
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

  task automatic cfg(input bit sel, input int addr, input logic [7:0] data);
    @(negedge clk); cfg_we = 1; cfg_sel = sel; cfg_addr = 3'(addr); cfg_data = data;
    @(negedge clk); cfg_we = 0;
  endtask
  task automatic lut(input int net, input int slot, input int pos);
    @(negedge clk); lut_we = 1; lut_net = 2'(net); lut_addr = 5'(slot);
    lut_data.valid = (pos >= 0); lut_data.pos = 7'(pos < 0 ? 0 : pos);
    @(negedge clk); lut_we = 0;
  endtask
  // scan slot of a unit's tap: unit 0 keeps 8 taps (slots 0-7), unit 6 keeps
  // 8 taps (slots 13-20), the others keep tap 0
  function automatic int slot_of(input int u, input int tap);
    case (u)
      0: return tap;  1: return 8;  2: return 9;  3: return 10;
      4: return 11;   5: return 12; 6: return 13 + tap; 7: return 21;
      default: return -1;
    endcase
  endfunction
  task automatic east_table(input int k);
    lut(0, slot_of(0, k), 0);
    for (int t = 0; t < 8; t++) if (t != k) lut(0, slot_of(0, t), -1);
  endtask
  task automatic set_vel(input int vx, input int vy);
    @(negedge clk); vel_we = 1; vel_data = {4'(vy + 8), 4'(vx + 8)};
    @(negedge clk); vel_we = 0;
  endtask

  // time from the end of the last phase reset to the next east firing
  realtime t_rel, t_fire;
  int fires = 0;
  logic cap_q = 0, v_q = 0;
  always @(posedge clk) begin
    if (cap_q && !cap_clear) t_rel = $realtime;
    if (vec[0] && !v_q) begin fires++; t_fire = $realtime; end
    cap_q <= cap_clear;
    v_q <= vec[0];
  end

  initial begin
    #400ms; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  realtime dt [4];

  initial begin
    rst = 1; cfg_we = 0; cfg_sel = 0; cfg_addr = 0; cfg_data = 0; cfg_start = 0;
    lut_we = 0; lut_net = 0; lut_addr = 0; lut_data = '0; trail_start = 0;
    vel_we = 0; vel_data = 8'h88; rd_ready = 1;
    repeat (4) @(negedge clk); rst = 0;
    for (int g = 0; g < 2; g++) begin
      cfg(0, 4*g+0, 8'h8C); cfg(0, 4*g+1, 8'h84); cfg(0, 4*g+2, 8'hC8); cfg(0, 4*g+3, 8'h48);
      cfg(1, 4*g+0, (g == 0) ? 8'h00 : 8'hFE);
      cfg(1, 4*g+1, 8'hFE);
      cfg(1, 4*g+2, (g == 1) ? 8'h00 : 8'hFE);
      cfg(1, 4*g+3, 8'hFE);
    end
    for (int n = 0; n < 4; n++) for (int s = 0; s < NS; s++) lut(n, s, -1);
    lut(0, slot_of(1, 0), 1); lut(0, slot_of(2, 0), 2); lut(0, slot_of(3, 0), 3);
    lut(0, slot_of(4, 0), 4); lut(0, slot_of(5, 0), 5); lut(0, slot_of(6, 0), 6); lut(0, slot_of(7, 0), 7);
    @(negedge clk); cfg_start = 1; @(negedge clk); cfg_start = 0;
    while (!cfg_done) @(negedge clk);
    @(negedge clk); trail_start = 1; @(negedge clk); trail_start = 0;

    east_table(3);
    repeat (2 * NS) @(negedge clk);        // table active from the next scan
    for (int v = 1; v <= 3; v++) begin
      int f0;
      f0 = fires;
      set_vel(v, 0);                       // the change resets the phases
      while (fires == f0 && $realtime - t_rel < 20ms) @(negedge clk);
      dt[v] = t_fire - t_rel;
      chk(fires > f0, "east cell fires");
      $display("speed %0d: first firing %0.3f ms after the reset", v, dt[v] / 1ms);
      set_vel(0, 0);
      #2ms;
    end
    // A timer would fire at one time whatever the speed; a displacement cell
    // fires sooner when the agent moves faster.  Firing can only happen on an
    // AND pulse, about once per theta period (0.5 ms), and the filters add a
    // lag, so the times are not exactly inversely proportional to speed.
    $display("(t1-t2)/(t2-t3) = %0.2f (3 for a fixed distance and a fixed lag)",
             (dt[1] - dt[2]) / (dt[2] - dt[3]));
    chk(dt[1] > dt[2] && dt[2] > dt[3], "faster motion reaches the cell sooner");
    chk(dt[1] - dt[3] > 0.3ms, "firing time depends on speed");

    // The cell stays silent when standing still or moving north or south.
    for (int m = 0; m < 3; m++) begin
      int f0;
      f0 = fires;
      case (m)
        0: set_vel(0, 0);
        1: set_vel(0, 2);
        default: set_vel(0, -2);
      endcase
      if (m == 0) begin @(negedge clk); trail_start = 1; @(negedge clk); trail_start = 0; end
      #6ms;
      chk(fires == f0, "silent off its direction");
      if (fires != f0) $display("case %0d fired %0d times", m, fires - f0);
    end
    // Moving west, a lone east cell aliases once the phases have slipped by
    // about two thirds of a cycle (nothing resets them); in the full system
    // the west cell fires first and resets.  Reported, not checked.
    begin
      int f0;
      f0 = fires;
      set_vel(-2, 0);
      #6ms;
      $display("lone east cell while moving west without resets: %0d aliased firings", fires - f0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
