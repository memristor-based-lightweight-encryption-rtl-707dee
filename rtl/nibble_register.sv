// nibble_register: the 4-bit output register of one slice.
//
// At the end of every round cycle (rnd high) it stores the four sense-amplifier outputs; its
// output, after the hard-wired permutation, is the S-box input of the next round. In the
// load cycle (ld high) it takes this slice's share of the plaintext instead. Load wins over
// a round. Rising-edge register with asynchronous active-low reset to 0.
// The register and its feedback follow the paper; the load path is this design's own.
module nibble_register (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       ld,
  input  logic [3:0] ld_val,
  input  logic       rnd,
  input  logic [3:0] rnd_val,
  output logic [3:0] q
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   q <= '0;
    else if (ld)  q <= ld_val;
    else if (rnd) q <= rnd_val;
  end

endmodule
