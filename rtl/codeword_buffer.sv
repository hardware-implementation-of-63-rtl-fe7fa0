// Received-codeword buffer of the BCH decoder.
//
// An N-bit shift register that holds the received word while its syndromes,
// error locator and Chien search are computed. Bits enter at the low end and
// leave at the high end in arrival order, so after N shifts the first bit in
// (r62) is on out_bit, and N further shifts release r62, r61, .. r0 in step with
// the Chien search. The whole content is also visible on `word` (bit i = r_i
// once the N bits are in). A plain shift register is this design's own choice;
// the source only states that the word is stored in a buffer until corrected.
//
// Interface: when `shift` is high, the register moves one place towards the MSB
// and takes `in_bit` at bit 0; out_bit is the MSB before the shift.
// No reset: every bit read is first written by N shifts.
module codeword_buffer
  import bch_pkg::*;
#(
  parameter int unsigned N = BCH_N
)(
  input  logic         clk,
  input  logic         shift,
  input  logic         in_bit,
  output logic         out_bit,
  output logic [N-1:0] word
);

  logic [N-1:0] buf_q;

  always_ff @(posedge clk) begin
    if (shift) buf_q <= {buf_q[N-2:0], in_bit};
  end

  assign out_bit = buf_q[N-1];
  assign word    = buf_q;

endmodule
