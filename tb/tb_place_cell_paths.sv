// tb_place_cell_paths: the three tracking experiments of the place-cell sheet
// at its default size (11 x 11, bump 10, leak 5, start at the centre).
// Each path is a sequence of vector-cell firings (E/W/N/S levels held for a
// few clocks, as the vector-cell networks produce them):
//   1. walking down (south) across the arena while looking left and right,
//      i.e. with east/west excursions that come back, until the bottom
//      border holds the bump;
//   2. going around an obstacle east of the start to reach [3,-2]
//      (3 cells east, 2 cells south);
//   3. a loop whose path crosses itself and returns to the start.
// The exact step lists of the original experiments are not given; these are
// representative ones.  For every path the test checks the final bump
// position, that the set of cells that ever fired equals the cells the
// integrated trail visited, the trailing cell at half activity, and prints the
// trail as a map.
`timescale 1ns/1ps
module tb_place_cell_paths;
  localparam int G = 11;
  logic clk = 0, rst, moved;
  logic [3:0] vec;
  logic [G*G*4-1:0] act;
  logic [3:0] bump_row, bump_col;
  int checks = 0, failures = 0;
  bit fired [G][G], visited [G][G];
  int pr, pc, qr, qc;

  place_cell_network dut (.clk, .rst, .vec, .act, .bump_row, .bump_col, .moved);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  function automatic int a(input int r, input int c);
    return int'(act[(r*G+c)*4 +: 4]);
  endfunction

  always @(posedge clk)
    for (int r = 0; r < G; r++) for (int c = 0; c < G; c++) if (a(r, c) == 10) fired[r][c] = 1;

  // one vector-cell firing: d 0 E, 1 W, 2 N, 3 S; level held 3 clocks
  task automatic step(input int d);
    int nr, nc;
    @(negedge clk); vec = 4'(1 << d);
    repeat (3) @(negedge clk);
    vec = 0;
    repeat (2) @(negedge clk);
    nr = pr + ((d == 3) ? 1 : (d == 2) ? -1 : 0);
    nc = pc + ((d == 0) ? 1 : (d == 1) ? -1 : 0);
    qr = pr; qc = pc;
    if (nr >= 0 && nr < G && nc >= 0 && nc < G) begin pr = nr; pc = nc; end
    visited[pr][pc] = 1;
    chk(bump_row == 4'(pr) && bump_col == 4'(pc), "bump follows the trail");
    chk(a(pr, pc) == 10, "bump at 10");
    if (qr != pr || qc != pc) chk(a(qr, qc) == 5, "trailing cell at 5");
  endtask

  task automatic walk(input string moves);
    for (int i = 0; i < moves.len(); i++)
      case (moves[i])
        "E": step(0);
        "W": step(1);
        "N": step(2);
        "S": step(3);
        default: ;
      endcase
  endtask

  task automatic start_path();
    @(negedge clk); rst = 1; vec = 0;
    repeat (2) @(negedge clk); rst = 0;
    for (int r = 0; r < G; r++) for (int c = 0; c < G; c++) begin fired[r][c] = 0; visited[r][c] = 0; end
    pr = G / 2; pc = G / 2; qr = pr; qc = pc; visited[pr][pc] = 1;
    @(negedge clk);
  endtask

  task automatic finish_path(input string name, input int er, input int ec);
    bit same;
    same = 1;
    for (int r = 0; r < G; r++) for (int c = 0; c < G; c++) if (fired[r][c] != visited[r][c]) same = 0;
    chk(same, "fired cells equal the trail");
    chk(pr == er && pc == ec, "end position");
    $display("%s: ends at row %0d col %0d (x=%0d, y=%0d from the centre)", name, pr, pc, pc - G / 2, G / 2 - pr);
    for (int r = 0; r < G; r++) begin
      string line;
      line = "  ";
      for (int c = 0; c < G; c++)
        line = {line, (r == pr && c == pc) ? "@" : fired[r][c] ? "o" : "."};
      $display("%s", line);
    end
  endtask

  initial begin
    #10ms; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1; vec = 0;
    // 1: down the arena, glancing sideways
    start_path();
    walk("SESWSWESEWSS");
    finish_path("path 1 (walk down, looking around)", G - 1, G / 2);
    chk(a(G - 1, G / 2) == 10, "bump held at the border");
    // 2: obstacle directly east; go north around it, then down to [3,-2]
    start_path();
    walk("NNEEEESSSSW");
    finish_path("path 2 (detour to [3,-2])", G / 2 + 2, G / 2 + 3);
    chk(pc - G / 2 == 3 && G / 2 - pr == -2, "destination [3,-2]");
    // 3: a loop that crosses its own trail and comes back
    start_path();
    walk("EEENNWWWWSSSSEEEENNWWW");
    finish_path("path 3 (loop)", G / 2, G / 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
