// tb_place_cell_network: path integration on the full 11 x 11 sheet.  Vector
// cell pulses (rising edges of the E/W/N/S levels) are applied: first a closed
// loop, then a long random walk that often pushes against the borders.  After
// every event the whole activity map is compared with a reference computed
// here: the bump (10) at the integrated position clipped to the sheet, the
// cell it just left at 5, everything else decayed by 5 per event; the bump
// position outputs and the `moved` pulse are checked as well.
`timescale 1ns/1ps
module tb_place_cell_network;
  localparam int G = 11;
  logic clk = 0, rst, moved;
  logic [3:0] vec;
  logic [G*G*4-1:0] act;
  logic [3:0] bump_row, bump_col;
  int checks = 0, failures = 0, moves_ref = 0, border_hits = 0;
  int ref_act [G][G];
  int pr, pc;

  place_cell_network #(.GRID(G)) dut (.clk, .rst, .vec, .act, .bump_row, .bump_col, .moved);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic compare();
    bit ok;
    ok = 1;
    for (int r = 0; r < G; r++)
      for (int c = 0; c < G; c++)
        if (act[(r*G+c)*4 +: 4] != 4'(ref_act[r][c])) ok = 0;
    chk(ok, "activity map");
    chk(bump_row == 4'(pr) && bump_col == 4'(pc), "bump position");
  endtask

  // d: 0 E, 1 W, 2 N, 3 S
  task automatic pulse(input int d);
    int nr, nc;
    @(negedge clk); vec = 4'(1 << d);
    @(negedge clk); #1 chk(moved, "moved pulse");
    vec = 0;
    @(negedge clk);
    nr = pr + ((d == 3) ? 1 : (d == 2) ? -1 : 0);
    nc = pc + ((d == 0) ? 1 : (d == 1) ? -1 : 0);
    if (nr < 0 || nr >= G || nc < 0 || nc >= G) begin nr = pr; nc = pc; border_hits++; end
    for (int r = 0; r < G; r++)
      for (int c = 0; c < G; c++)
        ref_act[r][c] = (ref_act[r][c] > 5) ? ref_act[r][c] - 5 : 0;
    ref_act[nr][nc] = 10;
    pr = nr; pc = nc;
    compare();
  endtask

  initial begin
    #10ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1; vec = 0;
    for (int r = 0; r < G; r++) for (int c = 0; c < G; c++) ref_act[r][c] = 0;
    pr = G / 2; pc = G / 2; ref_act[pr][pc] = 10;
    repeat (2) @(negedge clk); rst = 0;
    compare();
    // a closed loop: 2 N, 3 E, 4 S, 3 W, 2 N returns to the centre
    for (int i = 0; i < 2; i++) pulse(2);
    for (int i = 0; i < 3; i++) pulse(0);
    for (int i = 0; i < 4; i++) pulse(3);
    for (int i = 0; i < 3; i++) pulse(1);
    for (int i = 0; i < 2; i++) pulse(2);
    chk(pr == G / 2 && pc == G / 2, "loop returns to start");
    // a level that stays high is one event only
    @(negedge clk); vec = 4'b0001; repeat (5) @(negedge clk); vec = 0; @(negedge clk);
    for (int r = 0; r < G; r++) for (int c = 0; c < G; c++) ref_act[r][c] = (ref_act[r][c] > 5) ? ref_act[r][c] - 5 : 0;
    pc = pc + 1; ref_act[pr][pc] = 10; compare();
    for (int i = 0; i < 400; i++) pulse((i / 7) % 4 == 0 ? 0 : int'($urandom % 4));
    $display("border pushes: %0d", border_hits);
    chk(border_hits > 0, "border reached");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
