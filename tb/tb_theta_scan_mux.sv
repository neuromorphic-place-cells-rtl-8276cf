// tb_theta_scan_mux: loads a random slot->position table into a reduced mux
// (14 slots, 8-bit buffer), streams random serial samples and checks that each
// frame holds, at each position, the sample of the last slot mapped there, that
// invalid slots are dropped, and that frame_stb comes once every N_SLOTS clocks.
`timescale 1ns/1ps
module tb_theta_scan_mux;
  import nc_pkg::*;
  localparam int NS = 14, NB = 8;
  logic clk = 0, rst, lut_we, start, osc_in, frame_stb;
  logic [3:0] lut_addr;
  mux_lut_t lut_data;
  logic [NB-1:0] frame, ref_frame, ref_prev;
  mux_lut_t ref_lut [NS];
  int checks = 0, failures = 0, last_stb, stb_count;

  theta_scan_mux #(.N_SLOTS(NS), .N_BUF(NB)) dut (
    .clk, .rst, .lut_we, .lut_addr, .lut_data, .start, .osc_in, .frame, .frame_stb);
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
    rst = 1; lut_we = 0; start = 0; osc_in = 0; lut_addr = 0; lut_data = '0;
    repeat (2) @(negedge clk);
    rst = 0;
    for (int s = 0; s < NS; s++) begin
      ref_lut[s].valid = (s % 5) != 3;
      ref_lut[s].pos = 7'($urandom % NB);
      lut_we = 1; lut_addr = 4'(s); lut_data = ref_lut[s]; @(negedge clk);
    end
    lut_we = 0;
    repeat (3) @(negedge clk);
    start = 1;
    ref_frame = '0; stb_count = 0;
    for (int f = 0; f < 6; f++) begin
      for (int s = 0; s < NS; s++) begin
        osc_in = 1'($urandom);
        if (ref_lut[s].valid) ref_frame[ref_lut[s].pos] = osc_in;
        if (s == 0 && f > 0) begin
          chk(frame_stb, "frame strobe once per scan");
          chk(frame == ref_prev, "frame contents");
        end else if (f > 0 || s > 0) chk(!frame_stb, "no strobe mid-frame");
        @(negedge clk);
        start = 0;
      end
      ref_prev = ref_frame;
    end
    chk(frame_stb && frame == ref_prev, "last frame");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
