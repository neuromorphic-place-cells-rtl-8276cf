// tb_theta_pv_sram: checks the preferred-velocity store of a theta unit:
// clear to the zero code, writes only with `we`, x in the low and y in the
// high nibble of the bus.
`timescale 1ns/1ps
module tb_theta_pv_sram;
  logic clk = 0, clear, we;
  logic [7:0] din;
  logic [3:0] pv_x, pv_y;
  int checks = 0, failures = 0;
  logic [3:0] ex, ey;

  theta_pv_sram dut (.clk, .clear, .we, .din, .pv_x, .pv_y);
  always #5 clk = ~clk;

  task automatic check(input logic [3:0] x, input logic [3:0] y, input string what);
    checks++;
    if (pv_x !== x || pv_y !== y) begin
      failures++;
      $display("FAIL %s: got x=%0d y=%0d exp x=%0d y=%0d", what, pv_x, pv_y, x, y);
    end
  endtask

  initial begin
    #100000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clear = 1; we = 0; din = 8'h00;
    repeat (2) @(posedge clk);
    #1 check(4'd8, 4'd8, "clear gives zero code");
    clear = 0;
    ex = 8; ey = 8;
    for (int i = 0; i < 200; i++) begin
      din = 8'($urandom); we = 1'($urandom);
      @(posedge clk);
      if (we) begin ex = din[3:0]; ey = din[7:4]; end
      #1 check(ex, ey, "write/hold");
    end
    clear = 1; @(posedge clk); #1 check(4'd8, 4'd8, "second clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
