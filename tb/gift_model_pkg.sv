// gift_model_pkg: reference model of GIFT-128 and the off-line crossbar programming, for the
// testbenches.
//
// gift128_encrypt() is a plain, bit-by-bit model of the GIFT-128 specification: per round
// SubCells, PermBits, AddRoundKey (U = k5||k4 into bits 4i+2, V = k1||k0 into bits 4i+1),
// the round constant (bit 127 and c5..c0 into bits 23,19,...,3), then the key-state update
// k7..k0 <- (k1>>>2)||(k0>>>12)||k7..k2 and the constant update c <- {c[4:0], c5^c4^1}. It
// knows nothing of the crossbar layout. The S-box table is an argument, so that a
// reprogrammed S-box can be modelled too.
//
// xbar_row() is the off-line step the hardware relies on: it runs the same key schedule and
// returns, for slice n and RC/RK row r, the four cells to write, i.e. the bits of round r+1's
// key/constant mask moved back through the inverse permutation.
package gift_model_pkg;

  typedef logic [3:0] sbox_t [16];

  localparam sbox_t GIFT_SBOX = '{4'h1, 4'ha, 4'h4, 4'hc, 4'h6, 4'hf, 4'h3, 4'h9,
                                  4'h2, 4'hd, 4'hb, 4'h7, 4'h5, 4'h0, 4'h8, 4'he};

  function automatic int unsigned ref_perm(int unsigned i);
    return 4*(i/16) + 32*((3*((i%16)/4) + (i%4)) % 4) + (i%4);
  endfunction

  function automatic logic [15:0] ror16(logic [15:0] x, int unsigned n);
    return (x >> n) | (x << (16 - n));
  endfunction

  // Post-permutation XOR mask (round key and constant) of round rnd (0..39).
  function automatic logic [127:0] round_mask(logic [127:0] key, int unsigned rnd);
    logic [15:0]  w [8];
    logic [15:0]  nw [8];
    logic [5:0]   c;
    logic [31:0]  u, v;
    logic [127:0] m;
    for (int j = 0; j < 8; j++) w[j] = key[16*j +: 16];
    c = '0;
    m = '0;
    for (int unsigned r = 0; r <= rnd; r++) begin
      c = {c[4:0], c[5] ^ c[4] ^ 1'b1};
      if (r == rnd) begin
        u = {w[5], w[4]};
        v = {w[1], w[0]};
        for (int i = 0; i < 32; i++) begin
          m[4*i+2] = u[i];
          m[4*i+1] = v[i];
        end
        m[127] = 1'b1;
        for (int j = 0; j < 6; j++) m[4*j+3] = c[j];
      end
      for (int j = 0; j < 6; j++) nw[j] = w[j+2];
      nw[6] = ror16(w[0], 12);
      nw[7] = ror16(w[1], 2);
      w = nw;
    end
    return m;
  endfunction

  function automatic logic [127:0] gift128_encrypt(logic [127:0] pt, logic [127:0] key,
                                                   sbox_t sb);
    logic [127:0] s, t;
    s = pt;
    for (int unsigned r = 0; r < 40; r++) begin
      for (int n = 0; n < 32; n++) s[4*n +: 4] = sb[s[4*n +: 4]];
      t = '0;
      for (int unsigned i = 0; i < 128; i++) t[ref_perm(i)] = s[i];
      s = t ^ round_mask(key, r);
    end
    return s;
  endfunction

  // Cells of slice n on RC/RK row rnd (word line 16+rnd): the mask bits that land, after the
  // permutation, on the positions fed by bits 4n..4n+3 of the slice.
  function automatic logic [3:0] xbar_row(logic [127:0] key, int unsigned n, int unsigned rnd);
    logic [127:0] m;
    logic [3:0]   d;
    m = round_mask(key, rnd);
    for (int unsigned b = 0; b < 4; b++) d[b] = m[ref_perm(4*n + b)];
    return d;
  endfunction

endpackage
