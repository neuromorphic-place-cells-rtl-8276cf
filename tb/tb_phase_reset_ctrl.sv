// tb_phase_reset_ctrl: checks that trail start, a velocity change and the
// rising edge of any vector cell each give a Cap_clear pulse of exactly
// HOLD_CYCLES clocks with the right cause bits, that a vector cell staying high
// gives no second pulse, and (second instance) that the interval reset repeats
// every RESET_INTERVAL idle clocks.
`timescale 1ns/1ps
module tb_phase_reset_ctrl;
  localparam int H = 5, IV = 40;
  logic clk = 0, rst, trail_start, vel_change, cap_clear, cap2;
  logic [3:0] vec, cause, cause2;
  int checks = 0, failures = 0;

  phase_reset_ctrl #(.N_VEC(4), .HOLD_CYCLES(H)) dut (
    .clk, .rst, .trail_start, .vel_change, .vec, .cap_clear, .cause);
  phase_reset_ctrl #(.N_VEC(4), .HOLD_CYCLES(H), .RESET_INTERVAL(IV)) dut2 (
    .clk, .rst, .trail_start(1'b0), .vel_change(1'b0), .vec(4'b0), .cap_clear(cap2), .cause(cause2));
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic expect_pulse(input logic [3:0] c, input string what);
    int len;
    @(negedge clk);
    chk(cap_clear, {what, ": pulse starts next clock"});
    chk(cause == c, {what, ": cause"});
    len = 0;
    while (cap_clear && len < 100) begin len++; @(negedge clk); end
    chk(len == H, {what, ": pulse length"});
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int per;
  initial begin
    rst = 1; trail_start = 0; vel_change = 0; vec = 0;
    repeat (2) @(negedge clk);
    rst = 0;
    repeat (3) @(negedge clk);
    chk(!cap_clear, "idle");
    trail_start = 1; @(negedge clk); trail_start = 0;
    #0 chk(cap_clear, "trail start"); // sampled right after the edge
    begin int len; len = 1; @(negedge clk); while (cap_clear) begin len++; @(negedge clk); end chk(len == H, "trail start length"); end
    vel_change = 1; #1 @(negedge clk); vel_change = 0;
    chk(cap_clear && cause == 4'b0010, "velocity change");
    repeat (H + 2) @(negedge clk);
    for (int d = 0; d < 4; d++) begin
      vec = 4'(1 << d);
      expect_pulse(4'b0100, "vector cell firing");
      repeat (10) @(negedge clk);
      chk(!cap_clear, "level held high gives no second pulse");
      vec = 0; @(negedge clk);
    end
    // interval reset on the second instance
    while (!cap2) @(negedge clk);
    while (cap2) @(negedge clk);
    per = 0;
    while (!cap2) begin per++; @(negedge clk); end
    chk(per == IV, "interval between automatic resets");
    chk(cause2 == 4'b1000, "interval cause");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
