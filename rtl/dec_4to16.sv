// dec_4to16: SB address decoder of one slice (4-bit S-box input -> one of WL0..WL15).
//
// Built as a two-level NAND/NOR tree, the kind used for SRAM row decoders: the input is split
// into two 2-bit fields, each pre-decoded into four active-low lines by 2-input NANDs; a
// 2-input NOR of one low line from each field then raises exactly one word line. The enable
// (the round strobe) gates the pre-decoders, so no word line is driven while it is low.
// Purely combinational; the word line follows the address within the cycle.
// The tree structure follows the paper's choice of NAND/NOR decoders; the split into two
// 2-bit pre-decoders is this design's own.
module dec_4to16 (
  input  logic        en,
  input  logic [3:0]  addr,
  output logic [15:0] wl
);

  logic [3:0] pre_lo_n;  // active-low decode of addr[1:0]
  logic [3:0] pre_hi_n;  // active-low decode of addr[3:2]

  always_comb begin
    for (int unsigned k = 0; k < 4; k++) begin
      pre_lo_n[k] = ~(en & (addr[1:0] == 2'(k)));
      pre_hi_n[k] = ~(en & (addr[3:2] == 2'(k)));
    end
    for (int unsigned r = 0; r < 16; r++)
      wl[r] = ~(pre_hi_n[r/4] | pre_lo_n[r%4]);
  end

endmodule
