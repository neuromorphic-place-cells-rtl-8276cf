// tb_vector_cell_network: checks the fixed two-layer wiring and the output
// AND of a reduced network (16 inputs: 8 layer-1 nodes, 4 layer-2 nodes) with
// square-wave inputs.  All pairs in phase: the vector cell fires.  One pair in
// antiphase: that pair's layer-2 node and the vector cell stay low while the
// other layer-2 nodes are high, for every choice of pair, which checks which
// inputs each node takes.  A fixed phase offset on one input of every x pair
// delays the firing; the test checks the firing appears once the offset is
// removed, and that `clr` drops the output at once.
`timescale 1ns/1ps
module tb_vector_cell_network;
  localparam int NI = 16, N2 = NI / 4;
  logic clk = 0, rst, clr, en, vec;
  logic [NI-1:0] in_bits;
  logic [N2-1:0] l2_out;
  int checks = 0, failures = 0;

  vector_cell_network #(.N_IN(NI)) dut (.clk, .rst, .clr, .en, .in_bits, .vec, .l2_out);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  // run n frames; input i is a 14-frame square wave, shifted by half a period
  // where anti[i] is set
  int t = 0;
  task automatic run(input int n, input logic [NI-1:0] anti);
    for (int f = 0; f < n; f++) begin
      @(negedge clk);
      for (int i = 0; i < NI; i++) in_bits[i] = (((t + (anti[i] ? 7 : 0)) % 14) < 7);
      en = 1; @(negedge clk); en = 0; t++;
    end
  endtask

  initial begin
    #10ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1; clr = 0; en = 0; in_bits = '0;
    repeat (2) @(negedge clk);
    rst = 0;
    run(200, '0);
    chk(vec && l2_out == '1, "all in phase: vector cell fires");
    for (int p = 0; p < NI / 2; p++) begin
      run(200, NI'(1) << (2 * p + 1));
      chk(!vec, "one antiphase pair blocks the vector cell");
      chk(l2_out == ~(N2'(1) << (p / 2)), "antiphase pair reaches only its layer-2 node");
      run(200, '0);
      chk(vec, "vector cell recovers");
    end
    @(negedge clk); clr = 1; @(negedge clk); clr = 0;
    chk(!vec, "clr drops the vector cell");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
