// tb_vc_fifo: random pushes and pops on a small FIFO (depth 8) compared with a
// queue model: data order, rd_valid, full, count, drop-on-full with the sticky
// overflow flag, and its clearing by reset.
`timescale 1ns/1ps
module tb_vc_fifo;
  localparam int W = 4, D = 8;
  logic clk = 0, rst, wr_en, rd_ready, rd_valid, full, overflow;
  logic [W-1:0] wr_data, rd_data;
  logic [3:0] count;
  logic [W-1:0] q [$];
  bit ovf_ref;
  int checks = 0, failures = 0;

  vc_fifo #(.W(W), .DEPTH(D)) dut (.clk, .rst, .wr_en, .wr_data, .rd_ready, .rd_valid,
                                   .rd_data, .full, .overflow, .count);
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
    rst = 1; wr_en = 0; rd_ready = 0; wr_data = 0;
    repeat (2) @(negedge clk);
    rst = 0; ovf_ref = 0;
    for (int i = 0; i < 2000; i++) begin
      int bias;
      bias = ((i / 200) % 2) ? 70 : 30;      // alternate filling and draining
      wr_en = ($urandom % 100) < bias;
      rd_ready = ($urandom % 100) < (100 - bias);
      wr_data = W'($urandom);
      #1;
      chk(rd_valid == (q.size() != 0), "rd_valid");
      chk(full == (q.size() == D), "full");
      chk(count == 4'(q.size()), "count");
      chk(overflow == ovf_ref, "overflow flag");
      if (rd_valid) chk(rd_data == q[0], "head data");
      begin
        bit was_full;
        was_full = (q.size() == D);
        @(negedge clk);
        if (rd_ready && q.size() != 0) void'(q.pop_front());
        if (wr_en) begin
          if (!was_full) q.push_back(wr_data);
          else ovf_ref = 1;
        end
      end
    end
    rst = 1; @(negedge clk); rst = 0; q.delete(); #1;
    chk(!overflow && !rd_valid, "reset clears");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
