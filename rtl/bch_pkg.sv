// Shared constants and types of the (63,51,t=2) binary BCH encoder and decoder.
//
// The code is defined over GF(2^6) with primitive polynomial p(x) = 1 + x + x^6.
// Field elements are 6-bit vectors in the polynomial basis: bit k is the
// coefficient of alpha^k. The generator polynomial is the product of the minimal
// polynomials of alpha and alpha^3:
//   g(x) = (1 + x + x^6)(1 + x + x^2 + x^4 + x^6) = 1 + x^3 + x^4 + x^5 + x^8 + x^10 + x^12
// (bit i of GEN_POLY is the coefficient of x^i). Codeword bit i is the
// coefficient of x^i; bit 62 is sent first.
package bch_pkg;

  localparam int unsigned GF_M   = 6;          // field degree m
  localparam int unsigned BCH_N  = 63;         // code length n = 2^m - 1
  localparam int unsigned BCH_K  = 51;         // message length k
  localparam int unsigned BCH_P  = BCH_N - BCH_K; // parity bits n - k = 12

  typedef logic [GF_M-1:0] gf_t;

  // g(x), coefficient of x^i in bit i (x^12 term included).
  localparam logic [BCH_P:0] GEN_POLY = 13'b1_0101_0011_1001;

  // Constant field elements used by the syndrome and Chien search loops.
  localparam gf_t GF_ZERO   = 6'b000000;
  localparam gf_t GF_ALPHA1 = 6'b000010;  // alpha
  localparam gf_t GF_ALPHA2 = 6'b000100;  // alpha^2
  localparam gf_t GF_ALPHA3 = 6'b001000;  // alpha^3

endpackage
