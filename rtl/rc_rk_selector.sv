// rc_rk_selector: the single round sequencer shared by all 32 slices.
//
// A 6-bit round counter drives the 6-to-40 decoder, so in round r (1..40) word line
// WL(15+r) of every slice's RC/RK array is driven; a counter plus decoder is cheaper than a
// 40-bit one-hot shift register. Around the counter sits the session sequencing:
//   * start, while not busy, is the load cycle: the slice registers take the plaintext and
//     the counter clears to 0;
//   * the next 40 cycles are rounds: round_en is high, it drives the SB decoders and the read
//     pulse, and the counter selects the RC/RK row; after the 40th round busy falls and done
//     rises;
//   * done stays high, holding the ciphertext valid, until the next start.
// So a block takes 40 clock cycles from the load edge to done (4 us at 10 MHz).
// The counter and decoder follow the paper; the start/busy/done handshake is this design's.
module rc_rk_selector (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  output logic        load,      // load the plaintext this cycle
  output logic        round_en,  // a round is computed this cycle
  output logic [5:0]  round_cnt, // 0..39 = round 1..40
  output logic [39:0] rk_wl,     // RC/RK word lines WL16..WL55
  output logic        busy,
  output logic        done
);

  localparam logic [5:0] LAST = 6'(gift_pkg::ROUNDS - 1);

  assign load     = start && !busy;
  assign round_en = busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      round_cnt <= '0;
      busy      <= 1'b0;
      done      <= 1'b0;
    end else if (load) begin
      round_cnt <= '0;
      busy      <= 1'b1;
      done      <= 1'b0;
    end else if (busy) begin
      if (round_cnt == LAST) begin
        busy <= 1'b0;
        done <= 1'b1;
      end else begin
        round_cnt <= round_cnt + 6'd1;
      end
    end
  end

  dec_6to40 u_dec (
    .en  (round_en),
    .addr(round_cnt),
    .wl  (rk_wl)
  );

endmodule
