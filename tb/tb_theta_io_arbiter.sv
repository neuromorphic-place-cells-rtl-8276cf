// tb_theta_io_arbiter: programs a reduced arbiter (16 units x 8 phases) with a
// random bypass pattern and checks, cycle by cycle against a reference model:
// the token visits every stage in order during programming, the PV write
// enable appears on the first stage of each unit, the serial output carries
// the phase of the indexed stage, and afterwards each scan cycle visits exactly
// the kept stages, in order, one per clock.
`timescale 1ns/1ps
module tb_theta_io_arbiter;
  localparam int NU = 16, NP = 8, N = NU * NP;
  logic clk = 0, clear, write, bypass_in, osc_out;
  logic [N-1:0] phase_in, token;
  logic [NU-1:0] pv_we;
  logic ref_byp [N];
  int kept [$];
  int checks = 0, failures = 0, scan_pos;

  theta_io_arbiter #(.N_UNITS(NU), .N_PH(NP)) dut (
    .clk, .clear, .write, .bypass_in, .phase_in, .pv_we, .osc_out, .token);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  function automatic int pos_of(input logic [N-1:0] t);
    for (int i = 0; i < N; i++) if (t[i]) return i;
    return -1;
  endfunction

  initial begin
    #200000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clear = 1; write = 0; bypass_in = 0; phase_in = '0;
    repeat (3) @(posedge clk);
    @(negedge clk); clear = 0; write = 1;
    for (int k = 0; k < N; k++) begin
      ref_byp[k] = ($urandom % 100) < 70;
      bypass_in = ref_byp[k];
      phase_in = {$urandom, $urandom, $urandom, $urandom};
      #1;
      chk(pos_of(token) == k, "programming token order");
      chk(token == (N'(1) << k), "token one-hot");
      chk(pv_we == ((k % NP == 0) ? (NU'(1) << (k / NP)) : '0), "pv write enable");
      chk(osc_out == phase_in[k], "serial output while programming");
      @(negedge clk);
    end
    write = 0;
    for (int k = 0; k < N; k++) if (!ref_byp[k]) kept.push_back(k);
    $display("kept stages: %0d of %0d", kept.size(), N);
    for (int cyc = 0; cyc < 3; cyc++)
      for (int j = 0; j < kept.size(); j++) begin
        phase_in = {$urandom, $urandom, $urandom, $urandom};
        #1;
        chk(pos_of(token) == kept[j], "scan visits kept stage");
        chk(osc_out == phase_in[kept[j]], "serial output in scan");
        chk(pv_we == '0, "no PV write in scan");
        @(negedge clk);
      end
    // clear restarts the chain at stage 0 with no bypass
    clear = 1; @(negedge clk); clear = 0; #1;
    chk(token == N'(1), "clear returns token to stage 0");
    @(negedge clk); #1;
    chk(token == N'(2), "after clear stage 1 is not bypassed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
