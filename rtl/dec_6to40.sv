// dec_6to40: RC/RK address decoder (6-bit round count -> one of 40 word lines WL16..WL55).
//
// Output bit n drives WL(16+n), the row holding the round-key / round-constant bits of round
// n+1. Like the SB decoders it is a NAND/NOR tree: the count is split into a 3-bit high field
// (values 0..4 used) and a 3-bit low field, each pre-decoded into active-low lines, and a
// NOR of one line of each raises the word line. Counts 40..63 and a low enable drive no
// word line. Combinational.
// The paper gives the decoder's size and tree style; the field split is this design's own.
module dec_6to40 (
  input  logic        en,
  input  logic [5:0]  addr,
  output logic [39:0] wl
);

  logic [7:0] pre_lo_n;  // active-low decode of addr[2:0]
  logic [4:0] pre_hi_n;  // active-low decode of addr[5:3], values 0..4

  always_comb begin
    for (int unsigned k = 0; k < 8; k++)
      pre_lo_n[k] = ~(en & (addr[2:0] == 3'(k)));
    for (int unsigned k = 0; k < 5; k++)
      pre_hi_n[k] = ~(addr[5:3] == 3'(k));
    for (int unsigned n = 0; n < 40; n++)
      wl[n] = ~(pre_hi_n[n/8] | pre_lo_n[n%8]);
  end

endmodule
