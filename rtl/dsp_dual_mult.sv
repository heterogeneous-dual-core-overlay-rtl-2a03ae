// dsp_dual_mult: one DSP slice used as two signed 8x8 multipliers.
//
// The paper decomposes each DSP48E1 into two 8-bit multipliers that work in
// the same cycle but must share one input. This module has exactly that
// shape: one common operand and two private operands, two 16-bit products.
// Which signal is the common one is chosen by the PE array (feature-map
// pixel in the c-core, weight in the p-core window mode). Purely
// combinational; the register after it belongs to the adder tree.
module dsp_dual_mult (
  input  logic signed [7:0]  a_common,
  input  logic signed [7:0]  b0,
  input  logic signed [7:0]  b1,
  output logic signed [15:0] p0,
  output logic signed [15:0] p1
);
  assign p0 = a_common * b0;
  assign p1 = a_common * b1;
endmodule
