// Systematic (63,51) BCH encoder, serial in, parallel out.
//
// The 51 message bits enter one per cycle, m50 first. A 12-stage linear feedback
// shift register (r0 .. r11) divides x^12 m(x) by g(x): the feedback bit is the
// incoming message bit XOR r11, it enters r0, and it is XORed into the stages
// r3, r4, r5, r8 and r10, one for each nonzero low-order coefficient of
// g(x) = 1 + x^3 + x^4 + x^5 + x^8 + x^10 + x^12. After the 51st bit the
// register holds the remainder r(x) = x^12 m(x) mod g(x); it is taken out in
// parallel and appended to the message to form c(x) = x^12 m(x) + r(x).
// The register is seeded with zero at the first bit of every message.
//
// The source text prints g(x) with an x^9 term; that polynomial is not the
// product of the two minimal polynomials it is said to be, while the feedback
// taps drawn in the encoder block diagram (after stages 3, 4, 5, 8 and 10) do
// match the product, so this design uses x^8.
//
// Interface: in_valid/in_bit carry one message bit per cycle (no back-pressure;
// the encoder is always ready). Bits are counted, so message boundaries are
// implicit: every 51 accepted bits form one message, and a new message may start
// on the very next cycle. out_valid pulses for one cycle, the cycle after the
// 51st bit, with parity_out (bit i = r_i, r11 is the first parity bit sent) and
// codeword_out (bit i = coefficient of x^i, bit 62 = m50). Both outputs hold
// their value until the next message completes. Synchronous active-low reset.
module bch_encoder
  import bch_pkg::*;
#(
  parameter int unsigned N = BCH_N,
  parameter int unsigned K = BCH_K
)(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic             in_bit,
  output logic             out_valid,
  output logic [N-K-1:0]   parity_out,
  output logic [N-1:0]     codeword_out
);

  localparam int unsigned P  = N - K;
  localparam int unsigned CW = $clog2(K);

  logic [P-1:0]  lfsr_q, lfsr_seed, lfsr_d;
  logic [K-2:0]  msg_q;
  logic [K-1:0]  msg_d;
  logic [CW-1:0] count_q;
  logic          fb;

  // A message's first bit sees a zero seed, later bits the running remainder.
  assign lfsr_seed = (count_q == '0) ? '0 : lfsr_q;
  assign fb        = in_bit ^ lfsr_seed[P-1];

  always_comb begin
    lfsr_d[0] = fb;
    for (int unsigned i = 1; i < P; i++)
      lfsr_d[i] = lfsr_seed[i-1] ^ (GEN_POLY[i] & fb);
  end

  assign msg_d = {msg_q[K-2:0], in_bit};

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      lfsr_q       <= '0;
      msg_q        <= '0;
      count_q      <= '0;
      out_valid    <= 1'b0;
      parity_out   <= '0;
      codeword_out <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        lfsr_q <= lfsr_d;
        msg_q  <= msg_d[K-2:0];
        if (count_q == CW'(K - 1)) begin
          count_q      <= '0;
          out_valid    <= 1'b1;
          parity_out   <= lfsr_d;
          codeword_out <= {msg_d, lfsr_d};
        end else begin
          count_q <= count_q + 1'b1;
        end
      end
    end
  end

endmodule
