// gift_permbits: the GIFT-128 PermBits permutation as fixed wiring.
//
// With INVERSE = 0, bit i of d moves to bit P(i) of q, with
//     P(i) = 4*floor(i/16) + 32*((3*floor((i mod 16)/4) + (i mod 4)) mod 4) + (i mod 4),
// the permutation of GIFT-128. With INVERSE = 1, q is P^-1 of d. P keeps a bit's position
// inside its nibble, which lets the round key be added before the permutation (see
// gift_slice). No logic, only wires, so every output is an input bit by design;
// combinational.
module gift_permbits #(
  parameter bit INVERSE = 1'b0
) (
  input  logic [gift_pkg::STATE_W-1:0] d,
  output logic [gift_pkg::STATE_W-1:0] q
);

  for (genvar i = 0; i < gift_pkg::STATE_W; i++) begin : g_wire
    if (INVERSE) begin : g_inv
      assign q[i] = d[gift_pkg::perm_pos(i)];
    end else begin : g_fwd
      assign q[gift_pkg::perm_pos(i)] = d[i];
    end
  end

endmodule
