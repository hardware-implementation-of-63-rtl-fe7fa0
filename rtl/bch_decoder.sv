// (63,51,t=2) BCH decoder: syndromes, inversion-less Berlekamp-Massey, Chien
// search and error correction.
//
// The received word arrives serially, r62 first. Each bit is shifted into the
// codeword buffer and, in the same cycle, into the syndrome calculator. After the
// 63rd bit the key equation solver turns S1, S2, S3 into the error locator
// lambda(x) = S1 + S1^2 x + (S3 + S1 S2) x^2, and the Chien search then steps
// through alpha^1 .. alpha^63 while the buffer releases r62 .. r0 one per cycle.
// Where the Chien sum is zero the bit leaving the buffer is flipped: that XOR is
// the error correction step. Corrected bits go out serially and are also shifted
// back into the buffer, so at the end it holds the whole corrected word.
// Error correction is enabled only when some syndrome is nonzero. With three or
// more errors the result is whatever the t = 2 locator gives; nothing flags it.
//
// The decoder handles one word at a time: the sequencing (receive, solve, load,
// correct) and the ready handshake are this design's own choices.
//
// Interface and timing, counting the cycle that accepts r62 as cycle 0:
//   in_valid/in_bit/in_ready  one received bit per cycle while in_ready is high;
//                             in_ready drops after the 63rd bit (cycle 62) and
//                             returns on cycle 128.
//   out_valid/out_bit/out_last  corrected bits c62 .. c0 on cycles 66 .. 128,
//                             out_last with c0.
//   done                      one-cycle pulse on cycle 128; corrected_word
//                             (bit i = c_i) and err_detected are valid then and
//                             until the next word's first bit is accepted
//                             (err_detected until the next word is solved).
// Synchronous active-low reset.
module bch_decoder
  import bch_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic              in_bit,
  output logic              in_ready,
  output logic              out_valid,
  output logic              out_bit,
  output logic              out_last,
  output logic              done,
  output logic              err_detected,
  output logic [BCH_N-1:0]  corrected_word
);

  typedef enum logic [1:0] {
    ST_RECV,     // taking in the 63 received bits
    ST_SOLVE,    // syndromes final, key equation solver starts
    ST_LOAD,     // locator ready, Chien search loads
    ST_CORRECT   // Chien search runs, buffer drains through the correcting XOR
  } state_t;

  state_t     state_q;
  logic [5:0] count_q;

  logic accept;
  gf_t  s1, s2, s3;
  logic kes_start, kes_done;
  gf_t  lambda0, lambda1, lambda2;
  logic chien_valid, chien_err, chien_last;
  logic [5:0] chien_pos;
  logic buf_shift, buf_in, buf_out, fixed_bit;

  assign in_ready  = (state_q == ST_RECV);
  assign accept    = in_ready && in_valid;
  assign kes_start = (state_q == ST_SOLVE);

  // Error correction: flip the bit leaving the buffer where a root was found.
  assign fixed_bit = buf_out ^ chien_err;

  assign buf_shift = accept || chien_valid;
  assign buf_in    = accept ? in_bit : fixed_bit;

  codeword_buffer #(.N(BCH_N)) u_buffer (
    .clk     (clk),
    .shift   (buf_shift),
    .in_bit  (buf_in),
    .out_bit (buf_out),
    .word    (corrected_word)
  );

  syndrome_calc u_syndrome (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (accept),
    .in_first (count_q == 6'd0),
    .in_bit   (in_bit),
    .s1       (s1),
    .s2       (s2),
    .s3       (s3)
  );

  key_equation_solver u_kes (
    .clk          (clk),
    .rst_n        (rst_n),
    .start        (kes_start),
    .s1           (s1),
    .s2           (s2),
    .s3           (s3),
    .done         (kes_done),
    .err_detected (err_detected),
    .lambda0      (lambda0),
    .lambda1      (lambda1),
    .lambda2      (lambda2)
  );

  chien_search u_chien (
    .clk      (clk),
    .rst_n    (rst_n),
    .load     (kes_done),
    .enable   (err_detected),
    .lambda0  (lambda0),
    .lambda1  (lambda1),
    .lambda2  (lambda2),
    .valid    (chien_valid),
    .err      (chien_err),
    .position (chien_pos),
    .last     (chien_last)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state_q   <= ST_RECV;
      count_q   <= 6'd0;
      out_valid <= 1'b0;
      out_bit   <= 1'b0;
      out_last  <= 1'b0;
      done      <= 1'b0;
    end else begin
      out_valid <= chien_valid;
      out_bit   <= fixed_bit;
      out_last  <= chien_last;
      done      <= chien_last;
      unique case (state_q)
        ST_RECV: if (accept) begin
          if (count_q == 6'(BCH_N - 1)) begin
            count_q <= 6'd0;
            state_q <= ST_SOLVE;
          end else begin
            count_q <= count_q + 6'd1;
          end
        end
        ST_SOLVE:   state_q <= ST_LOAD;
        ST_LOAD:    state_q <= ST_CORRECT;
        ST_CORRECT: if (chien_last) state_q <= ST_RECV;
        default:    state_q <= ST_RECV;
      endcase
    end
  end

  // The Chien search steps through positions 62 .. 0 in the order the buffer
  // releases the bits; the correcting XOR relies on that alignment.
  logic [5:0] drain_pos_q;
  always_ff @(posedge clk) begin
    if (kes_done) drain_pos_q <= 6'(BCH_N - 1);
    else if (chien_valid) drain_pos_q <= drain_pos_q - 6'd1;
  end

  a_chien_aligned : assert property (@(posedge clk) disable iff (!rst_n)
    chien_valid |-> chien_pos == drain_pos_q)
    else $error("Chien search position out of step with the codeword buffer");

  a_no_input_while_busy : assert property (@(posedge clk) disable iff (!rst_n)
    chien_valid |-> !accept)
    else $error("input accepted during correction");

endmodule
