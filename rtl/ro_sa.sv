// ro_sa: behavioural model of the read-out sense amplifier on bit lines 0 and 3 of a slice.
//
// Behavioural model of an analog circuit. On these bit lines only the S-box cell of the
// selected row conducts, so the amplifier only has to tell LRS from HRS. In the DXOR variant
// it is a voltage comparator against a fixed 0.43 V reference; in the SXOR variant it is the
// scouting-logic VSA cut down to one reference memristor (550 kOhm) with an OR gate in place
// of the XOR gate. Both read 1 when at least one selected cell is in LRS, which is what this
// model computes from the bit-line level. Output is 0 while en (the read pulse) is low.
// Combinational: it is sampled by the slice register at the end of the read cycle.
module ro_sa #(
  parameter int unsigned LVL_W = 2
) (
  input  logic             en,
  input  logic [LVL_W-1:0] bl_lvl,
  output logic             q
);

  assign q = en && (bl_lvl != '0);

endmodule
