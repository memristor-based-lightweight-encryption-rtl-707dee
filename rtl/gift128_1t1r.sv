// gift128_1t1r: GIFT-128 block cipher built from 32 memristor-crossbar slices.
//
// Each slice (gift_slice) holds one nibble of the state and computes SubCells, AddRoundKey
// and the round constant for it in a single crossbar read. The 128 register bits of the
// slices pass through the hard-wired GIFT permutation (gift_permbits) back to the S-box
// inputs, so the same hardware runs all 40 rounds, one per clock cycle. One shared
// sequencer (rc_rk_selector: 6-bit counter and 6-to-40 decoder) selects the RC/RK word line
// of the current round in every slice. There is no key-schedule logic: the round keys and
// constants of all 40 rounds are computed off-chip and written into the crossbars once per
// key, together with the S-box table.
//
// Because the key is added before the permutation, the registers hold the state in
// "pre-permutation" form. The plaintext is therefore loaded through the inverse permutation,
// and the ciphertext is the permuted register contents, the same wires that feed the S-boxes.
//
// Interface
//   prog        crossbar write port (gift_pkg::prog_req_t): one word line of one slice, or
//               of all slices with bcast, per cycle; ignored while busy.
//               Rows 0..15: S-box entry S(row) on data[3:0].
//               Rows 16..55: key bits of round row-15 on data[2:1], constant bit on data[3].
//   start       with plaintext, begins an encryption when not busy (the load cycle).
//   busy/done   busy during the 40 round cycles; done rises after the last round and,
//               together with ciphertext, holds until the next start.
// Timing: done rises 40 clock cycles after the load edge (4 us at the 10 MHz clock the
// cipher is specified for).
// Follows the paper: slices, shared selector, off-line key schedule, one round per read.
// This design's own: the programming port, the load/start/done handshake and the
// pre-permutation register form (the paper feeds each register back to its own slice).
module gift128_1t1r
  import gift_pkg::*;
#(
  parameter xor_style_e XOR_STYLE = XOR_DSA
) (
  input  logic               clk,
  input  logic               rst_n,
  input  prog_req_t          prog,
  input  logic               start,
  input  logic [STATE_W-1:0] plaintext,
  output logic               busy,
  output logic               done,
  output logic [STATE_W-1:0] ciphertext
);

  logic               load, round_en;
  logic [5:0]         round_cnt;
  logic [RK_ROWS-1:0] rk_wl;
  logic [STATE_W-1:0] state_q;    // slice registers, pre-permutation form
  logic [STATE_W-1:0] state_p;    // permuted: S-box inputs / ciphertext
  logic [STATE_W-1:0] pt_pre;     // plaintext through P^-1

  rc_rk_selector u_sel (
    .clk      (clk),
    .rst_n    (rst_n),
    .start    (start),
    .load     (load),
    .round_en (round_en),
    .round_cnt(round_cnt),
    .rk_wl    (rk_wl),
    .busy     (busy),
    .done     (done)
  );

  gift_permbits #(.INVERSE(1'b1)) u_pt_perm (.d(plaintext), .q(pt_pre));
  gift_permbits #(.INVERSE(1'b0)) u_perm    (.d(state_q),   .q(state_p));

  for (genvar n = 0; n < NIBBLES; n++) begin : g_slice
    logic wr_en;
    assign wr_en = prog.en && !busy && (prog.bcast || (prog.slice == SLICE_W'(n)));

    gift_slice #(
      .HAS_RC   (slice_has_rc(n)),
      .XOR_STYLE(XOR_STYLE)
    ) u_slice (
      .clk    (clk),
      .rst_n  (rst_n),
      .wr_en  (wr_en),
      .wr_row (prog.row),
      .wr_data(prog.data),
      .rnd    (round_en),
      .sb_in  (state_p[4*n +: 4]),
      .rk_wl  (rk_wl),
      .ld     (load),
      .ld_val (pt_pre[4*n +: 4]),
      .q      (state_q[4*n +: 4])
    );
  end

  assign ciphertext = state_p;

  // The crossbars must not be reprogrammed in the middle of an encryption, and a word
  // line address must exist.
  a_no_prog_while_busy : assert property (@(posedge clk) disable iff (!rst_n)
    !(prog.en && busy))
    else $error("crossbar write during an encryption is ignored");
  a_row_in_range : assert property (@(posedge clk) disable iff (!rst_n)
    prog.en |-> (prog.row < ROW_W'(XBAR_ROWS)))
    else $error("crossbar write to a word line above WL55");
  a_round_count : assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> (round_cnt < 6'(ROUNDS)));

endmodule
