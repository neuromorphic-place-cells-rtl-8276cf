// tb_analog_dot_product: drives the analog computation model with voltages
// that encode velocity codes and checks that the output equals the inner
// product of the code vectors, over all sign combinations.
`timescale 1ns/1ps
module tb_analog_dot_product;
  real pv_x, pv_y, vin_x, vin_y, i_dot;
  int checks = 0, failures = 0;
  localparam real VZ = 0.5, VL = 0.05;

  analog_dot_product #(.V_ZERO(VZ), .V_LSB(VL)) dut (.pv_x, .pv_y, .vin_x, .vin_y, .i_dot);

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int px = -7; px <= 7; px += 3)
      for (int py = -7; py <= 7; py += 2)
        for (int vx = -4; vx <= 4; vx += 2)
          for (int vy = -4; vy <= 4; vy += 4) begin
            int e;
            pv_x = VZ + px * VL; pv_y = VZ + py * VL;
            vin_x = VZ + vx * VL; vin_y = VZ + vy * VL;
            #1;
            e = px * vx + py * vy;
            checks++;
            if (i_dot > e + 1e-6 || i_dot < e - 1e-6) begin
              failures++;
              $display("FAIL p=(%0d,%0d) v=(%0d,%0d): %f expected %0d", px, py, vx, vy, i_dot, e);
            end
          end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
