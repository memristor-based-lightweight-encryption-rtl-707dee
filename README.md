# GIFT-128 in 1T1R memristor crossbars

This is a SystemVerilog model of a lightweight block cipher built mostly from resistive
memory. The design is the memristor GIFT-128 of Siddiqi et al., "Memristor-Based Lightweight
Encryption" (DSD 2023). The idea is to keep everything a GIFT round needs in non-volatile
RRAM cells:

- the S-box table,
- the round keys and the round constants of all 40 rounds.

One round then costs a single crossbar read. Two rows are selected at once in each of 32
small crossbars: the S-box row addressed by the state nibble and the key row of the current
round. The XOR of AddRoundKey happens in the sense amplifiers under the bit lines. There is
no key-schedule logic on chip. The host runs the key schedule once per key and writes the
results into the arrays. After that, encryption only reads.

The memristor arrays and sense amplifiers are analog circuits. Here they are modelled at the
bit level: a cell is LRS (1) or HRS (0), and a bit line carries the number of selected LRS
cells. The models are still synthesizable, so the whole design also works as an ordinary
digital GIFT-128 core. The RTL produces the published GIFT-128 test vectors.

## One slice, one round

The 128-bit state is split into 32 nibbles. Slice *n* owns nibble *n* (state bits
4n+3..4n). Each slice has one crossbar with four bit lines, BL3..BL0, and 56 word lines:

| word lines | cells on | contents |
|---|---|---|
| WL0..WL15 (substitution) | BL3..BL0 | row *x* holds S(*x*), the GIFT S-box entry |
| WL16..WL55 (RC/RK) | BL2, BL1 (and BL3 in seven slices) | row 16+*r* holds the key bits of round *r*+1 (and its constant bit) |

In a round cycle the following happens:

1. The 4-to-16 decoder raises the S-box word line picked by the slice input.
2. The shared RC/RK selector raises word line 16+*r* in every slice.
3. The read pulse goes on. On BL1 and BL2 two cells now conduct into the same bit line: the
   S-box bit and the key bit.
4. An XOR sense amplifier on each of those bit lines returns the XOR of the two cells. BL0
   has no key cell, so a plain read-out amplifier returns the S-box bit. BL3 works the same
   way, except in the slices that carry a round-constant bit.
5. The four results go into the slice's 4-bit output register at the clock edge.

So one clock cycle covers SubCells and AddRoundKey (with the constant) for all 32 nibbles.
PermBits is pure wiring between the registers and the S-box inputs of the next round.

## Why the key sits before the permutation

In GIFT a round is S-box, then bit permutation P, then key XOR. In this design the key XOR
happens at the crossbar bit lines, which is before the permutation. This works because of
one property of P: it never changes a bit's position inside its nibble. Bit *b* of any
nibble always lands on bit *b* of some other nibble.

GIFT XORs a key bit into state bit *j* after the permutation. The same result comes from
XORing that key bit into bit P⁻¹(*j*) before it. P⁻¹(*j*) is a bit of the same index *b*, in
the slice that feeds position *j*. So the contents of row 16+*r* of slice *n* are:

    cell[BL b] = M_r[ P(4n + b) ]        b = 1, 2 (and 3)

Here M_r is GIFT's 128-bit XOR mask of round *r*+1:

- U = k5‖k4 goes into bits 4i+2, and V = k1‖k0 into bits 4i+1;
- bit 127 is always 1;
- the round constant c5..c0 goes into bits 23, 19, 15, 11, 7, 3.

GIFT's constant positions all have in-nibble index 3. After the inverse permutation they
fall into slices 3, 7, 11, 15, 19, 23 and 28. Only those seven slices get the third RC/RK
column and an XOR amplifier on BL3; `gift_pkg::slice_has_rc()` picks them. BL0 never gets
a key cell.

The registers therefore hold the state in "pre-permutation" form: the round result before P
is applied. This has two effects at the edges of an encryption:

- **Plaintext.** The plaintext is loaded through P⁻¹, so that P of the register gives the
  plaintext back as the first S-box input.
- **Ciphertext.** The ciphertext is P of the registers after round 40. These are the same
  wires that feed the S-boxes.

The original text says each register is "fed back to the input of the same SB". A plain
feedback like that would not compute GIFT, because P moves bits between nibbles. This design
follows the GIFT permutation instead. The permutation is fixed wiring either way, so the
hardware cost is the same.

## The round sequencer

A single `rc_rk_selector` serves all 32 slices. It is a 6-bit round counter driving a
6-to-40 decoder, which is cheaper than a 40-bit one-hot shift register. Around it sits a
small handshake:

- **Load.** `start` while idle is the load cycle. The registers take P⁻¹(plaintext), and
  the counter clears to 0.
- **Rounds.** The next 40 cycles are rounds. `busy` is high, and word line WL(16+count) is
  driven in every slice.
- **Done.** After round 40, `busy` falls and `done` rises. `done` and `ciphertext` hold
  until the next `start`.

`done` rises 40 clock cycles after the load edge. At the 10 MHz clock the original design
runs at, that is the published 4 µs per block.

## Programming the arrays

The arrays are written through the `prog` port of the top (`gift_pkg::prog_req_t`). Each
write covers one word line of one slice. With `bcast` set, it covers the same word line of
all 32 slices. Writes are ignored while `busy`, and an assertion flags them.

| `row` | `data` | typical use |
|---|---|---|
| 0..15 | S(row) on bits 3..0 | 16 broadcast writes load the shared S-box |
| 16..55 | key bits on bits 2..1, constant bit on bit 3 | 32 × 40 per-slice writes per key |

The off-line key schedule is `gift_model_pkg::xbar_row()` in `tb/`. It runs the standard
GIFT-128 key-state update and constant update, then applies the formula above. A host
implementation would do the same in software.

The S-box rows can be rewritten at any time between blocks. The original work argues for
this as a way to change (mask) the S-boxes at run time against side-channel attacks. The
masking scheme itself, and how the output would be corrected, is not specified there and is
not part of this RTL. What the RTL provides is the write port that such a scheme would use.

## Sense amplifiers and the bit-line abstraction

A bit line is modelled as a level: 0, 1 or 2 selected LRS cells. The amplifier models turn
that level into a bit.

- **DXOR** (`dxor_sa`, the default). An AND amplifier fires on two LRS cells (0.45 V
  reference in the original). A NOR amplifier fires on none (0.43 V). A 2-input NOR of the
  two gives the XOR.
- **SXOR** (`sxor_sa`). A scouting-logic voltage amplifier. V1 rises for at least one LRS
  cell and V2 only for two, using a 2 kΩ / 250 kΩ divider. A CMOS XOR of V1 and V2 gives
  the XOR. Select it with `XOR_STYLE = gift_pkg::XOR_SCOUTING` on the top. In the original
  it drew about four times the power of DXOR.
- **RO** (`ro_sa`). The read-out amplifier reads 1 for at least one LRS cell.

Voltages, currents, resistances, device variation and wire parasitics are not modelled. The
power, energy and area figures of the original come from SPICE and cannot be reproduced
here.

## Departures from the published design

- **Feedback path.** The registers reach the S-box inputs through the GIFT permutation, not
  straight back to their own slice (see above).
- **Own additions.** The programming port, broadcast writes, the `start`/`busy`/`done`
  handshake and the plaintext load path. The original describes none of these.
- **Round constants.** The seven slices with a constant column are derived here. The
  original only says "40×3 for the few nibbles with additional RC".
- **Decoders.** They are written as two-level NAND/NOR trees with pre-decoders. The tree
  style is the original's; the field split is this design's own.
- **Reset.** Reset clears the logic (registers, sequencer) but not the crossbar cells. Like
  a real RRAM array they keep their contents, so the S-box and key survive a reset. The
  end-to-end test checks this. Their power-up state is undefined until the first write.

## Files

| file | contents |
|---|---|
| `rtl/gift_pkg.sv` | constants, `xor_style_e`, `prog_req_t`, permutation functions, `slice_has_rc()` |
| `rtl/gift128_1t1r.sv` | top: 32 slices, permutation wiring, sequencer, programming port |
| `rtl/gift_slice.sv` | one slice: decoder, two crossbar parts on shared bit lines, amplifiers, register |
| `rtl/rram_crossbar.sv` | behavioural 1T1R crossbar (bit cells, bit-line levels) |
| `rtl/dec_4to16.sv`, `rtl/dec_6to40.sv` | word-line decoders |
| `rtl/rc_rk_selector.sv` | round counter, 6-to-40 decoder, start/busy/done |
| `rtl/dxor_sa.sv`, `rtl/sxor_sa.sv`, `rtl/ro_sa.sv` | behavioural sense amplifiers |
| `rtl/nibble_register.sv` | slice output register |
| `rtl/gift_permbits.sv` | GIFT-128 bit permutation (or its inverse) as wiring |
| `tb/gift_model_pkg.sv` | bit-level GIFT-128 reference and the off-line crossbar contents |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_gift128_sxor` |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself, with a cycle
watchdog as backstop. For example, the end-to-end test at the default configuration:

    verilator --binary --timing --assert -Irtl -Itb \
        rtl/gift_pkg.sv tb/gift_model_pkg.sv tb/tb_gift128_1t1r.sv \
        --top-module tb_gift128_1t1r -Mdir obj_top
    ./obj_top/Vtb_gift128_1t1r

It runs in well under a second. The unit testbenches build the same way; pass the package
files first.

`tb_gift128_1t1r` does the following:

- programs the S-box and the round keys as a host would;
- checks the three published GIFT-128 test vectors;
- checks random keys and blocks against the reference model;
- checks the 40-cycle latency, and that `busy` and `done` behave as described;
- checks that the arrays keep the S-box and key through a reset;
- rewrites the S-box with a different bijection and checks the result against the model.

It counts each of these mechanisms and fails if one never happened. `tb_gift128_sxor` runs
the same test with the scouting-logic amplifiers.

The reference model is a plain bit-by-bit transcription of the GIFT-128 specification. It
shares no code with the RTL, and it reproduces the published test vectors
(`0…0`/`0…0` → `cd0bd738388ad3f668b15a36ceb6ff92`, and two more).
