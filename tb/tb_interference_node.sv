// tb_interference_node: checks both node variants (layer-1 Hamming + short RC,
// layer-2 moving average + long RC).  A reference model written here from the
// filter definitions (9-tap FIR on the AND of the inputs, RC stage
// y += (x - y) >>> K, threshold) is compared with the node after every frame,
// on random inputs and on square waves.  It also checks the function: two
// square waves in phase give a high output, in antiphase a low one, and `clr`
// empties the filter.
`timescale 1ns/1ps
module tb_interference_node;
  import nc_pkg::*;
  logic clk = 0, rst, clr, en, a, b, y1, y2;
  int checks = 0, failures = 0;

  interference_node #(.FIR(FIR_HAMMING), .RC_SHIFT(2), .THRESH(64)) dut1 (
    .clk, .rst, .clr, .en, .a, .b, .y(y1));
  interference_node #(.FIR(FIR_MOVAVG), .RC_SHIFT(4), .THRESH(64)) dut2 (
    .clk, .rst, .clr, .en, .a, .b, .y(y2));
  always #5 clk = ~clk;

  // reference model state
  int ham [9] = '{5, 12, 29, 49, 64, 49, 29, 12, 5};
  int tp [2][9], fq [2], rc [2];
  bit yr [2];
  task automatic ref_reset();
    for (int v = 0; v < 2; v++) begin
      for (int n = 0; n < 9; n++) tp[v][n] = 0;
      fq[v] = 0; rc[v] = 0; yr[v] = 0;
    end
  endtask
  task automatic ref_step(input bit p);
    for (int v = 0; v < 2; v++) begin
      int f, k;
      k = (v == 0) ? 2 : 4;
      f = 0;
      for (int n = 0; n < 9; n++) f += tp[v][n] * ((v == 0) ? ham[n] : 28);
      yr[v] = rc[v] >= 64;
      rc[v] = rc[v] + ((fq[v] - rc[v]) >>> k);
      fq[v] = f;
      for (int n = 8; n > 0; n--) tp[v][n] = tp[v][n-1];
      tp[v][0] = p;
    end
  endtask

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  // one frame: inputs a/b for this frame, en high for one clock
  task automatic frame(input bit va, input bit vb);
    @(negedge clk); a = va; b = vb; en = 1;
    @(negedge clk); en = 0;
    ref_step(va & vb);
    chk(y1 == yr[0] && y2 == yr[1], "node matches reference");
  endtask

  initial begin
    #10ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int hi1, hi2;
  initial begin
    rst = 1; clr = 0; en = 0; a = 0; b = 0;
    repeat (2) @(negedge clk);
    rst = 0; ref_reset();
    for (int i = 0; i < 300; i++) frame(1'($urandom), 1'($urandom));
    // in phase: period 14 frames, both high for 7
    hi1 = 0; hi2 = 0;
    for (int i = 0; i < 280; i++) begin
      frame((i % 14) < 7, (i % 14) < 7);
      if (i >= 140) begin hi1 += y1; hi2 += y2; end
    end
    chk(hi2 == 140, "in-phase inputs: layer-2 node stays high");
    chk(hi1 > 40, "in-phase inputs: layer-1 node mostly high");
    // antiphase: never overlap
    hi1 = 0; hi2 = 0;
    for (int i = 0; i < 280; i++) begin
      frame((i % 14) < 7, (i % 14) >= 7);
      if (i >= 140) begin hi1 += y1; hi2 += y2; end
    end
    chk(hi1 == 0 && hi2 == 0, "antiphase inputs: nodes stay low");
    // clear
    for (int i = 0; i < 50; i++) frame(1, 1);
    chk(y1 && y2, "constant overlap gives high");
    @(negedge clk); clr = 1; @(negedge clk); clr = 0; ref_reset();
    chk(!y1 && !y2, "clr empties the filters");
    for (int i = 0; i < 40; i++) frame(1'($urandom), 1'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
