// dxor_sa: behavioural model of the dual-sense-amplifier XOR (DXOR) under one bit line.
//
// Behavioural model of an analog circuit. Two cells share the bit line during a round: the
// S-box cell of the selected LUT row and the round-key cell of the selected RC/RK row. Two
// voltage sense amplifiers compare the bit line with fixed references: the AND amplifier
// (0.45 V) fires only when both cells are in LRS, the NOR amplifier (0.43 V) fires only when
// both are in HRS. A 2-input NOR of the two gives the XOR:
//     Y_XOR = X1_AND NOR X2_NOR
// Here the bit-line level (number of selected LRS cells) stands in for the voltage. With en
// low (no read pulse) the amplifiers are off and both report 0, so Y would read 1; the
// output is forced to 0 instead so that an idle amplifier reads as 0. Combinational.
module dxor_sa #(
  parameter int unsigned LVL_W = 2
) (
  input  logic             en,
  input  logic [LVL_W-1:0] bl_lvl,
  output logic             q,
  output logic             x1_and,   // AND amplifier output
  output logic             x2_nor    // NOR amplifier output
);

  assign x1_and = en && (bl_lvl >= LVL_W'(2));
  assign x2_nor = en && (bl_lvl == '0);
  assign q      = en && !(x1_and || x2_nor);

endmodule
