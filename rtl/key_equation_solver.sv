// Key equation solver: inversion-less Berlekamp-Massey result for t = 2.
//
// For a double-error-correcting binary BCH code the two iterations of the
// inversion-less Berlekamp-Massey algorithm collapse into closed form. Scaled by
// S1 so that no field inversion is needed, the error locator polynomial is
//   lambda(x) = lambda0 + lambda1 x + lambda2 x^2
//   lambda0 = S1,  lambda1 = S1 * S1,  lambda2 = S3 + S1 * S2.
// Its roots are the inverses of the error locations. With one error lambda2 is
// zero and the single root is 1/S1; with no error all three are zero.
// (The source prints the middle equation with the subscript 2; the position and
// the algorithm make clear it is lambda1.)
//
// Two GF(2^6) multipliers and an adder; the coefficients are registered, so they
// appear on the cycle after `start` with `done` high for that one cycle.
// err_detected is high when the syndromes are not all zero. Synchronous
// active-low reset.
module key_equation_solver
  import bch_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  gf_t  s1,
  input  gf_t  s2,
  input  gf_t  s3,
  output logic done,
  output logic err_detected,
  output gf_t  lambda0,
  output gf_t  lambda1,
  output gf_t  lambda2
);

  gf_t s1_sq, s1_s2;

  gf64_mul u_mul_sq (.a(s1), .b(s1), .y(s1_sq));
  gf64_mul u_mul_12 (.a(s1), .b(s2), .y(s1_s2));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      done         <= 1'b0;
      err_detected <= 1'b0;
      lambda0      <= GF_ZERO;
      lambda1      <= GF_ZERO;
      lambda2      <= GF_ZERO;
    end else begin
      done <= start;
      if (start) begin
        lambda0      <= s1;
        lambda1      <= s1_sq;
        lambda2      <= s3 ^ s1_s2;
        err_detected <= (s1 != GF_ZERO) || (s2 != GF_ZERO) || (s3 != GF_ZERO);
      end
    end
  end

endmodule
