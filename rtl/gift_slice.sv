// gift_slice: one of the 32 slices of the 1T1R GIFT-128 cipher; computes one nibble of a
// full round (SubCells, AddRoundKey and round constant) in a single crossbar read.
//
// The slice is one crossbar with four bit lines BL3..BL0 and 56 word lines:
//   * WL0..WL15, the substitution part: row x holds S(x), the GIFT S-box entry of x, with
//     bit b on BL b. The 4-to-16 decoder drives row sb_in.
//   * WL16..WL55, the RC/RK part: row 16+n holds the key bits of round n+1 on BL1 and BL2
//     and, in the seven slices with HAS_RC set, the round-constant bit on BL3. The shared
//     RC/RK selector drives the row of the current round (rk_wl).
// During a round both rows are selected and the read pulse is applied, so on BL1 and BL2 (and
// BL3 with HAS_RC) the S-box cell and the key cell conduct into the same bit line, and an
// XOR sense amplifier returns their XOR. BL0 (and BL3 without HAS_RC) have no key cell and a
// read-out amplifier returns the S-box bit. The four results are stored in the slice's
// output register at the end of the cycle.
//
// The key bits are placed before the permutation: since PermBits keeps a bit's position in
// its nibble, XORing key bit k into bit b of this slice's S-box output is the same as GIFT
// XORing it into bit b of the nibble this bit is wired to. The offline key schedule must
// therefore store, in slice n, row 16+r, the key/constant bits that GIFT adds in round r+1 to
// the state bits P(4n+1), P(4n+2) (and P(4n+3)).
//
// Interface: wr_* program one word line (0..55) of this slice; rnd marks a round cycle,
// sb_in is this slice's S-box input (the permuted register outputs), rk_wl the 40 RC/RK word
// lines; ld/ld_val load the register with a plaintext nibble; q is the register.
// Timing: one round per clock cycle, result registered on the rising edge.
// Follows the paper: the row layout, the SA placement and the one-read round. This design's
// own: the programming port and the XOR_STYLE switch between the paper's two XOR variants.
module gift_slice
  import gift_pkg::*;
#(
  parameter bit         HAS_RC    = 1'b0,
  parameter xor_style_e XOR_STYLE = XOR_DSA
) (
  input  logic             clk,
  input  logic             rst_n,
  // crossbar programming
  input  logic             wr_en,
  input  logic [ROW_W-1:0] wr_row,
  input  logic [3:0]       wr_data,
  // round
  input  logic             rnd,
  input  logic [3:0]       sb_in,
  input  logic [RK_ROWS-1:0] rk_wl,
  // plaintext load
  input  logic             ld,
  input  logic [3:0]       ld_val,
  output logic [3:0]       q
);

  localparam int unsigned RK_COLS = HAS_RC ? 3 : 2;   // BL1, BL2 (, BL3)

  // ---------------- substitution part, WL0..WL15
  logic [SB_ROWS-1:0]        sb_wl;
  logic [3:0][LVL_W-1:0]     sb_lvl;
  logic                      sb_wr;

  assign sb_wr = wr_en && (wr_row < ROW_W'(SB_ROWS));

  dec_4to16 u_sb_dec (
    .en  (rnd),
    .addr(sb_in),
    .wl  (sb_wl)
  );

  rram_crossbar #(.ROWS(SB_ROWS), .COLS(4), .LVL_W(LVL_W)) u_sb_xbar (
    .clk    (clk),
    .wr_en  (sb_wr),
    .wr_row (wr_row[3:0]),
    .wr_data(wr_data),
    .wl     (sb_wl),
    .sl_rd  (rnd),
    .bl_lvl (sb_lvl)
  );

  // ---------------- RC/RK part, WL16..WL55
  logic [RK_COLS-1:0][LVL_W-1:0] rk_lvl;
  logic                          rk_wr;
  logic [ROW_W-1:0]              rk_row;

  assign rk_wr  = wr_en && (wr_row >= ROW_W'(RK_WL_BASE)) && (wr_row < ROW_W'(XBAR_ROWS));
  assign rk_row = wr_row - ROW_W'(RK_WL_BASE);

  rram_crossbar #(.ROWS(RK_ROWS), .COLS(RK_COLS), .LVL_W(LVL_W)) u_rk_xbar (
    .clk    (clk),
    .wr_en  (rk_wr),
    .wr_row (rk_row),
    .wr_data(wr_data[RK_COLS:1]),
    .wl     (rk_wl),
    .sl_rd  (rnd),
    .bl_lvl (rk_lvl)
  );

  // ---------------- shared bit lines: the currents of both parts add up
  logic [3:0][LVL_W-1:0] bl_lvl;

  always_comb begin
    for (int unsigned b = 0; b < 4; b++) begin
      bl_lvl[b] = sb_lvl[b];
      if (b >= 1 && b <= RK_COLS) begin
        // saturating add of the two parts' levels
        if (32'(sb_lvl[b]) + 32'(rk_lvl[b-1]) > (1 << LVL_W) - 1) bl_lvl[b] = '1;
        else bl_lvl[b] = sb_lvl[b] + rk_lvl[b-1];
      end
    end
  end

  // ---------------- sense amplifiers
  logic [3:0] sa_q;

  ro_sa #(.LVL_W(LVL_W)) u_ro0 (.en(rnd), .bl_lvl(bl_lvl[0]), .q(sa_q[0]));

  for (genvar b = 1; b < 4; b++) begin : g_bl
    if (b <= RK_COLS) begin : g_xor
      if (XOR_STYLE == XOR_DSA) begin : g_dsa
        dxor_sa #(.LVL_W(LVL_W)) u_sa (
          .en(rnd), .bl_lvl(bl_lvl[b]), .q(sa_q[b]), .x1_and(), .x2_nor());
      end else begin : g_scout
        sxor_sa #(.LVL_W(LVL_W)) u_sa (
          .en(rnd), .bl_lvl(bl_lvl[b]), .q(sa_q[b]), .v1_hi(), .v2_hi());
      end
    end else begin : g_ro
      ro_sa #(.LVL_W(LVL_W)) u_sa (.en(rnd), .bl_lvl(bl_lvl[b]), .q(sa_q[b]));
    end
  end

  // ---------------- output register
  nibble_register u_reg (
    .clk    (clk),
    .rst_n  (rst_n),
    .ld     (ld),
    .ld_val (ld_val),
    .rnd    (rnd),
    .rnd_val(sa_q),
    .q      (q)
  );

endmodule
