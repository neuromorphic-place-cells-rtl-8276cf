// w2w_dac: behavioural model of the W-2W transistor-ladder DAC of a theta unit.
//
// Behavioural model (not synthesizable): it stands for an analog ladder.  The
// 4-bit offset-binary velocity code becomes a voltage
//     vout = V_ZERO + V_OFFSET + (code - 8) * V_LSB
// so code 8 sits on the zero reference.  V_OFFSET models the small mismatch
// between the DAC's zero output and the broadcast zero reference that the paper
// measured; it defaults to 0.  The voltage scale (V_ZERO, V_LSB) is not given
// in the paper and is this model's choice.  The output follows the code with no
// delay.
`timescale 1ns/1ps
module w2w_dac #(
  parameter real V_ZERO   = 0.5,
  parameter real V_LSB    = 0.05,
  parameter real V_OFFSET = 0.0
) (
  input  logic [3:0] code,
  output real        vout
);
  always_comb vout = V_ZERO + V_OFFSET + (real'(code) - 8.0) * V_LSB;
endmodule
