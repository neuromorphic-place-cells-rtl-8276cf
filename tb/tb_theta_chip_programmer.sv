// tb_theta_chip_programmer: fills the configuration memories of a reduced
// programmer (6 units) with random bytes, runs the start-up sequence and
// checks every clock: Clear for CLEAR_CYCLES clocks, then one programming clock
// per arbiter stage with Write high and the right Bypass bit and PV byte,
// then scan_start for exactly one clock and `done`.  A second start repeats it.
`timescale 1ns/1ps
module tb_theta_chip_programmer;
  import nc_pkg::*;
  localparam int NU = 6, NP = 8, CC = 4;
  logic clk = 0, rst, cfg_we, cfg_sel, start, busy, done, scan_start;
  logic [2:0] cfg_addr;
  logic [7:0] cfg_data;
  theta_ctrl_t ctrl;
  logic [7:0] pv_ref [NU], byp_ref [NU];
  int checks = 0, failures = 0;

  theta_chip_programmer #(.N_UNITS(NU), .N_PH(NP), .CLEAR_CYCLES(CC)) dut (
    .clk, .rst, .cfg_we, .cfg_sel, .cfg_addr, .cfg_data, .start, .ctrl, .busy, .done, .scan_start);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1; cfg_we = 0; cfg_sel = 0; cfg_addr = 0; cfg_data = 0; start = 0;
    #1 chk(ctrl.clear == 1'b1, "clear during reset");
    repeat (2) @(negedge clk);
    rst = 0;
    for (int u = 0; u < NU; u++) begin
      pv_ref[u] = 8'($urandom); byp_ref[u] = 8'($urandom);
      cfg_we = 1; cfg_addr = 3'(u);
      cfg_sel = 0; cfg_data = pv_ref[u]; @(negedge clk);
      cfg_sel = 1; cfg_data = byp_ref[u]; @(negedge clk);
    end
    cfg_we = 0;
    for (int run = 0; run < 2; run++) begin
      start = 1; @(negedge clk); start = 0;
      for (int c = 0; c < CC; c++) begin
        chk(ctrl.clear && !ctrl.write && busy, "clear phase");
        @(negedge clk);
      end
      for (int k = 0; k < NU * NP; k++) begin
        chk(!ctrl.clear && ctrl.write, "write phase");
        chk(ctrl.bypass == byp_ref[k / NP][k % NP], "bypass bit");
        chk(ctrl.pv == pv_ref[k / NP], "pv byte");
        chk(!scan_start, "no early scan_start");
        @(negedge clk);
      end
      chk(scan_start && done && !ctrl.write && !ctrl.clear, "scan_start after programming");
      @(negedge clk);
      chk(!scan_start && done, "scan_start one clock");
      repeat (3) @(negedge clk);
      // a host write while idle is accepted for the next run
      pv_ref[0] = 8'h5A; cfg_we = 1; cfg_sel = 0; cfg_addr = 0; cfg_data = 8'h5A; @(negedge clk); cfg_we = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
