# A (63,51) double-error-correcting BCH codec for body-area-network radios

The narrowband PHY of IEEE 802.15.6 protects its payload with a systematic
(63,51) binary BCH code: 51 data bits are sent together with 12 parity bits, and
the receiver can find and repair any two wrong bits among the 63. The code is
cheap in hardware, which matters for battery-powered and implanted sensors.
This RTL is a bit-serial encoder and decoder for that code. It follows the
architecture described by P. Mathew, L. Augustine, S. G. and T. Devis in
"Hardware Implementation of (63,51) BCH Encoder and Decoder for WBAN Using LFSR
and BMA": an LFSR divider for encoding; for decoding, a syndrome calculator,
a closed-form inversion-less Berlekamp-Massey step, a Chien search and a
correcting XOR. The original design was written in VHDL for a Virtex-4 FPGA.
This is a new SystemVerilog implementation. Where the description is silent or
self-contradictory, the choices made here are listed in
[Where this RTL departs from the description](#where-this-rtl-departs-from-the-description).

## The code

Everything runs in GF(2^6), the field of 64 elements. Its elements are 6-bit
vectors in the polynomial basis (bit k = coefficient of alpha^k). alpha is a root
of the primitive polynomial

    p(x) = 1 + x + x^6          (so alpha^6 = 1 + alpha, and alpha^63 = 1)

A t = 2 BCH code of length 63 must have alpha, alpha^2, alpha^3 and alpha^4 as
roots of every codeword. Roots come in conjugate pairs (alpha^2 and alpha^4 follow
from alpha), so the generator polynomial is the product of the minimal
polynomials of alpha and alpha^3:

    g(x) = (1 + x + x^6)(1 + x + x^2 + x^4 + x^6)
         = 1 + x^3 + x^4 + x^5 + x^8 + x^10 + x^12

A message m(x) = m50 x^50 + ... + m0 becomes the codeword

    c(x) = x^12 m(x) + r(x),     r(x) = x^12 m(x) mod g(x)

so bits 62..12 of the codeword are the message unchanged and bits 11..0 are the
parity. Bit 62 (m50) is sent first and bit 0 (r0) last. The same order, highest
degree first, is used on every serial interface in this design.

## Files

| file | what it is |
|---|---|
| `rtl/bch_pkg.sv` | n, k, m, g(x) and the 6-bit field element type |
| `rtl/gf64_mul.sv` | GF(2^6) multiplier (combinational) |
| `rtl/bch_encoder.sv` | LFSR encoder, serial in, parallel out |
| `rtl/syndrome_calc.sv` | S1, S2, S3 by Horner's rule |
| `rtl/key_equation_solver.sv` | error locator coefficients lambda0..lambda2 |
| `rtl/chien_search.sv` | root search over alpha^1..alpha^63 |
| `rtl/codeword_buffer.sv` | 63-bit shift register holding the received word |
| `rtl/bch_decoder.sv` | decoder datapath, sequencing and error correction |
| `rtl/bch_codec.sv` | top level: encoder and decoder side by side |
| `tb/tb_bch_ref_pkg.sv` | reference model shared by the testbenches |
| `tb/tb_<module>.sv` | one self-checking testbench per module |

## The field multiplier

`gf64_mul` computes a*b mod p(x) with 36 AND and 35 XOR gates. The full
product has coefficients c0..c10. Each term of degree 6 or more is folded back
using alpha^6 = 1 + alpha, alpha^7 = alpha + alpha^2, ..., alpha^10 = alpha^4 + alpha^5, so

    y0 = c0 + c6        y1 = c1 + c6 + c7     y2 = c2 + c7 + c8
    y3 = c3 + c8 + c9   y4 = c4 + c9 + c10    y5 = c5 + c10

Grouped by the bits of a, this gives the "most significant element"
equations in the module. In these, pairs like (b5 + b0) show where a reduction
term shares an AND gate with a direct term. The published y3 equation is a
copy of y4's tail and is wrong. The one used here is derived from the rule
above; the testbench checks all 4096 operand pairs.

The same module multiplies by a constant (alpha, alpha^2, alpha^3) in the
syndrome and Chien loops. A synthesis tool reduces those instances to a few
XORs.

## Encoder

`bch_encoder` is the textbook division circuit. The 12-bit register r0..r11
starts at zero for each message. For each incoming bit:

    fb    = in_bit ^ r11
    r0   <= fb
    ri   <= r(i-1) ^ (g_i & fb)      i = 1..11, taps at i = 3, 4, 5, 8, 10

After 51 bits the register holds r(x). The cycle after the 51st bit,
`out_valid` pulses with `parity_out` (r11..r0) and `codeword_out` (the message
followed by the parity). There is no start signal: the encoder counts bits, and
every 51 accepted bits form a message. The next message may follow without a
gap. The zero seed is applied to the first bit of every message, so no clear
cycle is needed.

## Decoder

The received word r(x) = c(x) + e(x) goes in serially, r62 first. The decoder
runs four steps, one word at a time.

### 1. Syndromes

    S_i = r(alpha^i),  i = 1, 2, 3

`syndrome_calc` computes these by Horner's rule, S_i <= S_i * alpha^i + r_j. It
uses one constant multiplier and one 6-bit register per syndrome. The
syndromes depend only on the error pattern: a codeword gives S1 = S2 = S3 = 0.
In a binary code S2 = S1^2, so S2 carries no new information. It is still
computed, as in the original architecture, and used in the next step.

### 2. Error locator (key equation solver)

With error locations X1 = alpha^p1 and X2 = alpha^p2, the error locator
is (1 + X1 x)(1 + X2 x). For t = 2, the two Berlekamp-Massey iterations can be
written out in closed form. Scaling by S1 removes the only division:

    lambda(x) = lambda0 + lambda1 x + lambda2 x^2
    lambda0 = S1
    lambda1 = S1 * S1
    lambda2 = S3 + S1 * S2          (= S3 + S1^3)

With one error, S3 = S1^3, so lambda2 = 0 and the one root is 1/S1. With no
error, all three coefficients are zero. `key_equation_solver` computes
this in one clock with two multipliers. It also raises `err_detected` when any
syndrome is nonzero.

### 3. Chien search

`chien_search` evaluates lambda(alpha^j) for j = 1..63, one value per cycle.
lambda0 stays in its own register. lambda1 and lambda2 sit in registers that
are multiplied by alpha and by alpha^2 on every cycle. The sum of the three
registers is therefore lambda0 + lambda1 alpha^j + lambda2 alpha^2j. The
registers are loaded already multiplied once, so the first step tests alpha^1.

If alpha^j is a root, its inverse alpha^(63-j) is an error location, so bit
63 - j is wrong. The steps j = 1, 2, ..., 63 report bits 62, 61, ..., 0.
That is the order in which the received bits leave the buffer, so the
search output can be XORed straight onto the bit stream. No position
decoding is needed.

There is one trap. With no errors, lambda is identically zero and every
alpha^j would look like a root. The search therefore flags roots only
when `err_detected` is set.

### 4. Correction

`codeword_buffer` is a 63-bit shift register. It fills while the syndromes
are computed and empties while the Chien search runs. Each leaving bit is
XORed with the Chien search's error flag. The result goes to the serial output
and is also shifted back into the buffer, which ends up holding the whole
corrected word.

### Decoder timing

Cycle 0 is the cycle that accepts r62:

| cycles | state | what happens |
|---|---|---|
| 0 - 62 | receive | `in_ready` high; bits into buffer and syndrome registers |
| 63 | solve | key equation solver registers lambda |
| 64 | load | Chien search loads lambda1 alpha, lambda2 alpha^2 |
| 65 - 127 | correct | Chien steps j = 1..63; buffer drains through the XOR |
| 66 - 128 | | `out_valid`, `out_bit` = c62 .. c0 (`out_last` with c0) |
| 128 | | `done`; `corrected_word`, `err_detected` valid; next word's r62 may be accepted |

One word takes 128 cycles. The sender must hold its bit while `in_ready` is
low. `corrected_word` stays valid until the next word's first bit is
accepted. Two assertions in `bch_decoder` check that the Chien position
matches the bit leaving the buffer, and that no input is accepted during
correction.

With three or more errors, a t = 2 code cannot be trusted. Usually the
syndromes are nonzero and `err_detected` is high, but the word that
comes out may have further bits flipped. No separate "uncorrectable" flag is
produced.

## Top level

`bch_codec` places the encoder (transmit) and the decoder (receive) side by
side. They share the clock and the synchronous active-low reset and are not
connected to each other. In a radio, the encoder's codeword would be
serialised, parity r11 first after the message, and sent over the air; the
decoder would take the demodulated bits.

Ports: `enc_in_valid`, `enc_in_bit` -> `enc_out_valid`, `enc_parity[11:0]`,
`enc_codeword[62:0]`; `dec_in_valid`, `dec_in_bit`, `dec_in_ready` ->
`dec_out_valid`, `dec_out_bit`, `dec_out_last`, `dec_done`,
`dec_err_detected`, `dec_corrected_word[62:0]`.

## Where this RTL departs from the description

- **Generator polynomial.** The published text gives g(x) with an x^9 term,
  but also gives it as (1 + x + x^6)(1 + x + x^2 + x^4 + x^6), whose product
  has x^8. The tap positions drawn in the original encoder diagram (before
  stages 4, 5, 6, 9 and 11, numbering from 1) also match x^8. With x^9,
  alpha^3 would not be a root of the codewords, and the decoder could not
  correct two errors. This design uses x^8: g(x) = 1 + x^3 + x^4 + x^5 + x^8 +
  x^10 + x^12, octal 12471, the standard generator for this code.
- **Multiplier bit y3.** Derived, not copied; see above.
- **Locator subscripts.** The published list names lambda2 twice. The middle
  equation, S1 * S1, is lambda1.
- **Chien sum.** The text writes lambda1 alpha^-j. The block diagram
  multiplies lambda1 by alpha every step, giving alpha^+j, which is what the
  root / inverse reasoning needs. This design follows the diagram.
- **Syndrome S3.** Printed as r(alpha^2) in one place; its expansion is
  r(alpha^3), which is used.
- **Own choices**, not given in the description: the valid/ready handshakes;
  bit counting in place of frame signals; the one-word-at-a-time decoder
  schedule (128 cycles); the zero-syndrome gate on the Chien search; refilling
  the buffer with the corrected bits; the parallel codeword outputs;
  synchronous active-low reset.
- **Not included:** the FPGA clock manager and the evaluation board's host
  bus through which the original outputs were read. These are vendor
  infrastructure, not part of the codec. The shortened (31,19) header code
  of 802.15.6 is mentioned in the original only as background and is not
  built.

The original FPGA build used 179 flip-flops for the encoder and 295 for the
decoder. This RTL needs 144 flip-flops in the encoder (12 LFSR, 50 message,
63 codeword-out, 12 parity-out, 6 counter, 1 valid). The decoder needs 140
(63 buffer, 18 syndrome, 20 locator, 26 Chien, control).

## Verification

Each testbench compares the module under test with a reference model in
`tb/tb_bch_ref_pkg.sv`. The model is written independently of the RTL:
shift-and-add field multiplication, long division by g(x) (with g built as
the product of the minimal polynomials), and syndromes by direct evaluation.

| testbench | what it checks |
|---|---|
| `tb_gf64_mul` | all 4096 products; alpha^6 = 1 + alpha; alpha has order 63 |
| `tb_bch_encoder` | 300 messages (zero, all-ones, every single bit, random), back to back and with gaps; parity, codeword, codeword roots at alpha and alpha^3, output one cycle after the 51st bit |
| `tb_syndrome_calc` | 400 words with 0-3 errors or random content, with idle cycles |
| `tb_key_equation_solver` | closed form on random syndromes; for real 1- and 2-error patterns the roots are exactly the inverse error locations |
| `tb_chien_search` | every single-error position, 150 random pairs, disabled search, rootless locator, restart; step timing |
| `tb_codeword_buffer` | 63-shift delay and word contents under random shifting |
| `tb_bch_decoder` | 400+ words with 0, 1, 2 (including end bits 0 and 62) and 3 errors; serial and parallel outputs, `err_detected`, all cycle counts in the table above |
| `tb_bch_codec` | 600 words end to end, encoder -> channel adding 0/1/2 errors -> decoder; counts clean words, single and double corrections, decoder back-pressure and back-to-back messages, and fails if any never occurs |

Each ends with a line `TB_RESULT checks=N failures=M`. To run one with
Verilator from the project root:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
        rtl/bch_pkg.sv tb/tb_bch_ref_pkg.sv tb/tb_bch_codec.sv \
        --top-module tb_bch_codec -o sim
    ./obj_dir/sim

The codec has no size parameters beyond n = 63 and k = 51. The end-to-end
test runs the design exactly as it would be built, in a few seconds.

## Changing it

The constants are in `bch_pkg`. The encoder is parameterised by N and K and
takes its taps from `GEN_POLY`. Another code with 12 parity bits needs only a
new `GEN_POLY`; a different number of parity bits also needs the width of
`GEN_POLY` changed to match N - K. The decoder is specific to t = 2 and
GF(2^6): the closed-form locator, the alpha / alpha^2 Chien multipliers and
the 6-bit step counter all assume it. To pipeline the decoder (accept the
next word while correcting the current one), the buffer would need a second
63-bit stage, and the syndrome registers would need to be copied into the
solver at cycle 63. Both the `in_first` input of `syndrome_calc` and the
registered solver already allow this.
