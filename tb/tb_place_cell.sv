// tb_place_cell: one place cell with its path cells.  Checks: an excited cell
// jumps to ACT_FIRE; a firing cell keeps its activity through the
// self-excitatory loop when no vector cell of an existing direction fires; its
// path cell d fires when vector cell d fires; it then leaks 10 -> 5 -> 0; a
// missing neighbour (HAS_NB) blocks that path cell and keeps the bump.
`timescale 1ns/1ps
module tb_place_cell;
  logic clk = 0, rst, step;
  logic [3:0] vc_pulse, exc_in, path_out;
  logic [3:0] act;
  logic firing;
  int checks = 0, failures = 0;

  place_cell #(.AW(4), .ACT_FIRE(10), .LEAK(5), .HAS_NB(4'b1101), .INIT_ACTIVE(1'b0)) dut (
    .clk, .rst, .step, .vc_pulse, .exc_in, .path_out, .act, .firing);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s at %0t (act=%0d)", what, $time, act); end
  endtask

  task automatic ev(input logic [3:0] vc, input logic [3:0] ex, input logic [3:0] exp_path);
    @(negedge clk); step = 1; vc_pulse = vc; exc_in = ex;
    #1 chk(path_out == exp_path, "path cell outputs");
    @(negedge clk); step = 0; vc_pulse = 0; exc_in = 0;
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1; step = 0; vc_pulse = 0; exc_in = 0;
    repeat (2) @(negedge clk); rst = 0;
    chk(act == 0 && !firing, "reset to baseline");
    ev(4'b0001, 4'b0000, 4'b0000);  chk(act == 0, "inactive cell ignores vector cells");
    ev(4'b0000, 4'b0100, 4'b0000);  chk(act == 10 && firing, "excited by neighbour");
    ev(4'b0000, 4'b0000, 4'b0000);  chk(act == 10, "self loop holds");
    @(negedge clk); vc_pulse = 4'b0001; #1 chk(path_out == 0, "no path output without step");
    vc_pulse = 0;
    ev(4'b0010, 4'b0000, 4'b0000);  chk(act == 10, "missing neighbour keeps the bump");
    ev(4'b0001, 4'b0000, 4'b0001);  chk(act == 5, "path cell fired: leak to 5");
    ev(4'b0000, 4'b0000, 4'b0000);  chk(act == 0, "leak to 0");
    ev(4'b0000, 4'b0000, 4'b0000);  chk(act == 0, "stays at baseline");
    ev(4'b0000, 4'b1000, 4'b0000);
    ev(4'b1000, 4'b0000, 4'b1000);  chk(act == 5, "south path");
    ev(4'b0000, 4'b0001, 4'b0000);  chk(act == 10, "re-excited from tail");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
