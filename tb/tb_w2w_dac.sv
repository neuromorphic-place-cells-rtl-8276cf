// tb_w2w_dac: checks the DAC model's transfer function for all 16 codes,
// including that code 8 gives the zero reference.
`timescale 1ns/1ps
module tb_w2w_dac;
  logic [3:0] code;
  real vout;
  int checks = 0, failures = 0;

  w2w_dac #(.V_ZERO(0.6), .V_LSB(0.04)) dut (.code, .vout);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < 16; c++) begin
      real exp_v;
      code = 4'(c);
      #1;
      exp_v = 0.6 + 0.04 * (c - 8);
      checks++;
      if (vout > exp_v + 1e-9 || vout < exp_v - 1e-9) begin
        failures++;
        $display("FAIL code %0d: %f expected %f", c, vout, exp_v);
      end
    end
    // monotonic, ascending
    checks++;
    code = 4'd3; #1;
    begin
      real v3;
      v3 = vout; code = 4'd4; #1;
      if (!(vout > v3)) begin failures++; $display("FAIL not ascending"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
