// Syndrome calculator for the (63,51) BCH decoder.
//
// Three Horner-rule registers evaluate the received polynomial r(x) at alpha,
// alpha^2 and alpha^3 while its bits arrive serially, r62 first:
//   S_i <= S_i * alpha^i + r_j,   i = 1, 2, 3.
// Each loop is a GF(2^6) multiplier by the constant alpha^i, an adder (XOR into
// bit 0, since r_j is a single bit) and a 6-bit register. After the 63rd bit the
// registers hold S1 = r(alpha), S2 = r(alpha^2), S3 = r(alpha^3).
//
// Interface: in_valid/in_bit deliver one received bit per cycle. in_first marks
// the first bit (r62) of a codeword: the registers are then treated as zero so
// one codeword follows another with no clearing cycle. s1..s3 are valid on the
// cycle after the 63rd bit has been accepted and hold until the next in_first.
// Counting the 63 bits is the caller's job. Synchronous active-low reset.
module syndrome_calc
  import bch_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  logic in_first,
  input  logic in_bit,
  output gf_t  s1,
  output gf_t  s2,
  output gf_t  s3
);

  gf_t s1_fb, s2_fb, s3_fb;   // registers as seen by the loop (zero on a first bit)
  gf_t s1_m,  s2_m,  s3_m;    // after the constant multipliers

  assign s1_fb = in_first ? GF_ZERO : s1;
  assign s2_fb = in_first ? GF_ZERO : s2;
  assign s3_fb = in_first ? GF_ZERO : s3;

  gf64_mul u_mul1 (.a(s1_fb), .b(GF_ALPHA1), .y(s1_m));
  gf64_mul u_mul2 (.a(s2_fb), .b(GF_ALPHA2), .y(s2_m));
  gf64_mul u_mul3 (.a(s3_fb), .b(GF_ALPHA3), .y(s3_m));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s1 <= GF_ZERO;
      s2 <= GF_ZERO;
      s3 <= GF_ZERO;
    end else if (in_valid) begin
      s1 <= s1_m ^ gf_t'(in_bit);
      s2 <= s2_m ^ gf_t'(in_bit);
      s3 <= s3_m ^ gf_t'(in_bit);
    end
  end

endmodule
