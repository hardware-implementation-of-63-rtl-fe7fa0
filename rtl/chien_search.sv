// Chien search for the (63,51) BCH decoder.
//
// Tries every nonzero field element alpha^j, j = 1 .. 63, one per cycle, as a
// root of lambda(x) = lambda0 + lambda1 x + lambda2 x^2. lambda0 sits in a
// register of its own; lambda1 and lambda2 sit in registers that are multiplied
// by alpha and alpha^2 every cycle, so at step j they hold lambda1 alpha^j and
// lambda2 alpha^2j and their XOR with lambda0 is lambda(alpha^j). A zero sum
// marks a root; the error location is its inverse alpha^-j = alpha^(63-j), so the
// erroneous bit is r_(63-j). A counter started with the search gives j, and
// the reported position is 63 - j (63 is reported as 0). Because the positions
// come out in the order 62, 61, .. 0 they line up with the received bits as they
// leave the codeword buffer, r62 first.
//
// At `load` the two rotating registers take lambda1*alpha and lambda2*alpha^2,
// so that the first step already evaluates alpha^1. (Loading them unchanged would
// start the search at alpha^0 = alpha^63 and shift every position by one.)
//
// Interface: pulse `load` with the coefficients and `enable` (the decoder passes
// "syndromes not all zero": with no error lambda is identically zero and every
// element would look like a root). From the next cycle on, `valid` is high for
// 63 cycles, one per step; `err` is high on steps that found a root, `position`
// gives the bit index and `last` marks step 63. A new `load` restarts the
// search. Synchronous active-low reset.
module chien_search
  import bch_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       load,
  input  logic       enable,
  input  gf_t        lambda0,
  input  gf_t        lambda1,
  input  gf_t        lambda2,
  output logic       valid,
  output logic       err,
  output logic [5:0] position,
  output logic       last
);

  gf_t        l0_q, l1_q, l2_q;
  gf_t        l1_src, l2_src, l1_next, l2_next;
  gf_t        sum;
  logic       en_q;
  logic [5:0] step_q;      // j of the evaluation currently on the outputs

  // On load the multipliers act on the new coefficients, otherwise on the loop.
  assign l1_src = load ? lambda1 : l1_q;
  assign l2_src = load ? lambda2 : l2_q;

  gf64_mul u_mul_a1 (.a(l1_src), .b(GF_ALPHA1), .y(l1_next));
  gf64_mul u_mul_a2 (.a(l2_src), .b(GF_ALPHA2), .y(l2_next));

  assign sum      = l0_q ^ l1_q ^ l2_q;
  assign err      = valid && en_q && (sum == GF_ZERO);
  assign position = (step_q == 6'd63) ? 6'd0 : 6'd63 - step_q;
  assign last     = valid && (step_q == 6'd63);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      l0_q   <= GF_ZERO;
      l1_q   <= GF_ZERO;
      l2_q   <= GF_ZERO;
      en_q   <= 1'b0;
      step_q <= 6'd0;
      valid  <= 1'b0;
    end else if (load) begin
      l0_q   <= lambda0;
      l1_q   <= l1_next;
      l2_q   <= l2_next;
      en_q   <= enable;
      step_q <= 6'd1;
      valid  <= 1'b1;
    end else if (valid) begin
      l1_q <= l1_next;
      l2_q <= l2_next;
      if (step_q == 6'd63) begin
        valid <= 1'b0;
      end else begin
        step_q <= step_q + 6'd1;
      end
    end
  end

endmodule
