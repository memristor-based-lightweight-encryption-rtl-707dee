// sxor_sa: behavioural model of the scouting-logic XOR with a voltage sense amplifier (SXOR).
//
// Behavioural model of an analog circuit. The bit line feeds a divider of two reference
// memristors, M1 (2 kOhm) over M2 (250 kOhm) to ground. V1, the bit-line node, crosses the
// 0.45 V gate threshold when at least one of the two selected cells is in LRS; V2, the node
// between M1 and M2, crosses it only when both are. A CMOS XOR gate of V1 and V2 therefore
// gives the XOR of the two cells (OR xor AND). The bit-line level (number of selected LRS
// cells) stands in for the voltage. Output is 0 while en is low. Combinational.
// This is the alternative XOR of the design; dxor_sa is the default.
module sxor_sa #(
  parameter int unsigned LVL_W = 2
) (
  input  logic             en,
  input  logic [LVL_W-1:0] bl_lvl,
  output logic             q,
  output logic             v1_hi,   // V1 above threshold
  output logic             v2_hi    // V2 above threshold
);

  assign v1_hi = en && (bl_lvl >= LVL_W'(1));
  assign v2_hi = en && (bl_lvl >= LVL_W'(2));
  assign q     = v1_hi ^ v2_hi;

endmodule
