// GF(2^6) multiplier, y = a * b mod p(x), p(x) = 1 + x + x^6.
//
// Purely combinational. The six output bits are the "most significant element"
// partial-product sums: each product term a_i*b_j with i + j >= 6 is folded back
// with alpha^6 = 1 + alpha, which shows up as the paired terms (b_u + b_v) below.
// The equations for y5, y4, y2, y1 and y0 are those of the source description;
// its printed y3 repeats the tail of y4 and is not a correct product, so y3 here
// is derived from the same reduction rule (y3 = c3 + c8 + c9, with c_k the k-th
// coefficient of the unreduced product).
//
// Interface: a, b, y are 6-bit field elements in the polynomial basis
// (bit k = coefficient of alpha^k). No clock; zero cycles of latency.
module gf64_mul
  import bch_pkg::*;
(
  input  gf_t a,
  input  gf_t b,
  output gf_t y
);

  always_comb begin
    y[5] = (a[5] & (b[5] ^ b[0])) ^ (a[4] & b[1]) ^ (a[3] & b[2]) ^ (a[2] & b[3])
         ^ (a[1] & b[4]) ^ (a[0] & b[5]);
    y[4] = (a[5] & (b[4] ^ b[5])) ^ (a[4] & (b[5] ^ b[0])) ^ (a[3] & b[1]) ^ (a[2] & b[2])
         ^ (a[1] & b[3]) ^ (a[0] & b[4]);
    y[3] = (a[5] & (b[3] ^ b[4])) ^ (a[4] & (b[4] ^ b[5])) ^ (a[3] & (b[5] ^ b[0]))
         ^ (a[2] & b[1]) ^ (a[1] & b[2]) ^ (a[0] & b[3]);
    y[2] = (a[5] & (b[2] ^ b[3])) ^ (a[4] & (b[3] ^ b[4])) ^ (a[3] & (b[4] ^ b[5]))
         ^ (a[2] & (b[5] ^ b[0])) ^ (a[1] & b[1]) ^ (a[0] & b[2]);
    y[1] = (a[5] & (b[1] ^ b[2])) ^ (a[4] & (b[2] ^ b[3])) ^ (a[3] & (b[3] ^ b[4]))
         ^ (a[2] & (b[4] ^ b[5])) ^ (a[1] & (b[5] ^ b[0])) ^ (a[0] & b[1]);
    y[0] = (a[5] & b[1]) ^ (a[4] & b[2]) ^ (a[3] & b[3]) ^ (a[2] & b[4]) ^ (a[1] & b[5])
         ^ (a[0] & b[0]);
  end

endmodule
