// gift_pkg: constants, types and wiring functions shared by the 1T1R GIFT-128 design.
//
// The cipher state is 128 bits, split into 32 nibbles; nibble n is bits [4n+3:4n] and is
// handled by slice n. A slice owns one crossbar of 56 word lines: WL0..WL15 hold the S-box
// look-up table, WL16..WL55 hold the pre-computed round-key / round-constant bits of
// rounds 1..40. The GIFT-128 bit permutation P (PermBits) keeps the position of a bit inside
// its nibble, so a key bit that GIFT adds after PermBits can equally be added before it, on
// the bit line of the same index in the slice that produces it. perm_pos() and perm_inv()
// give that mapping; slice_has_rc() names the seven slices whose bit line 3 also carries a
// round-constant bit and so needs a third RC/RK column and an XOR sense amplifier.
package gift_pkg;

  localparam int unsigned STATE_W    = 128;  // GIFT-128 block
  localparam int unsigned NIBBLES    = 32;   // slices
  localparam int unsigned ROUNDS     = 40;   // GIFT-128 rounds
  localparam int unsigned SB_ROWS    = 16;   // WL0..WL15
  localparam int unsigned RK_ROWS    = 40;   // WL16..WL55
  localparam int unsigned RK_WL_BASE = 16;   // first RC/RK word line
  localparam int unsigned XBAR_ROWS  = SB_ROWS + RK_ROWS;  // 56 word lines per slice
  localparam int unsigned ROW_W      = 6;    // word-line address width (0..55)
  localparam int unsigned SLICE_W    = 5;    // slice address width (0..31)
  localparam int unsigned LVL_W      = 2;    // bit-line level: number of conducting LRS cells, 0..2

  // Which XOR sense amplifier the slices use.
  typedef enum logic {
    XOR_DSA      = 1'b0,   // DXOR: AND SA + NOR SA + NOR gate (the better of the two)
    XOR_SCOUTING = 1'b1    // SXOR: scouting-logic voltage SA (divider + XOR gate)
  } xor_style_e;

  typedef logic [LVL_W-1:0] bl_lvl_t;

  // One write to the crossbars: set (1 = LRS) or reset (0 = HRS) the cells of one word line.
  typedef struct packed {
    logic               en;     // write this cycle
    logic               bcast;  // write the row of every slice (e.g. the shared S-box)
    logic [SLICE_W-1:0] slice;  // slice written when bcast is 0
    logic [ROW_W-1:0]   row;    // word line, 0..55
    logic [3:0]         data;   // cell per bit line BL3..BL0
  } prog_req_t;

  // GIFT-128 PermBits: bit i of the state moves to bit perm_pos(i).
  function automatic int unsigned perm_pos(int unsigned i);
    return 4*(i/16) + 32*((3*((i%16)/4) + (i%4)) % 4) + (i%4);
  endfunction

  // Inverse permutation: the bit that lands on position j came from perm_inv(j).
  function automatic int unsigned perm_inv(int unsigned j);
    int unsigned r;
    r = 0;
    for (int unsigned i = 0; i < STATE_W; i++)
      if (perm_pos(i) == j) r = i;
    return r;
  endfunction

  // GIFT-128 places its round constant on bits 127, 3, 7, 11, 15, 19 and 23 after PermBits.
  // A slice needs a round-constant column when its bit 3 is permuted onto one of them.
  function automatic bit slice_has_rc(int unsigned n);
    int unsigned p;
    p = perm_pos(4*n + 3);
    return (p == STATE_W-1) || (p <= 23);
  endfunction

endpackage
