// (63,51,t=2) BCH codec for the narrowband PHY of an IEEE 802.15.6 body area
// network transceiver: the systematic LFSR encoder of the transmit path and the
// syndrome / Berlekamp-Massey / Chien search decoder of the receive path.
//
// The two halves share only the clock and reset; each keeps its own handshake
// (see bch_encoder and bch_decoder for the cycle-level timing):
//   transmit: enc_in_valid/enc_in_bit take 51 message bits, m50 first; the cycle
//             after the 51st, enc_out_valid pulses with the 12 parity bits and
//             the 63-bit systematic codeword (bit 62 = m50, bits 11..0 parity).
//   receive:  dec_in_valid/dec_in_bit/dec_in_ready take 63 received bits, r62
//             first; the corrected bits stream out on dec_out_*, and dec_done
//             pulses 128 cycles after the first bit with the corrected word.
// Keeping both halves in one top, not linked to each other, is this design's
// own arrangement; the source builds and measures them as two designs. On the
// FPGA board they were read through the board's host bus, which is not part of
// this RTL, so every signal is a plain top-level port.
module bch_codec
  import bch_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // transmit path
  input  logic              enc_in_valid,
  input  logic              enc_in_bit,
  output logic              enc_out_valid,
  output logic [BCH_P-1:0]  enc_parity,
  output logic [BCH_N-1:0]  enc_codeword,
  // receive path
  input  logic              dec_in_valid,
  input  logic              dec_in_bit,
  output logic              dec_in_ready,
  output logic              dec_out_valid,
  output logic              dec_out_bit,
  output logic              dec_out_last,
  output logic              dec_done,
  output logic              dec_err_detected,
  output logic [BCH_N-1:0]  dec_corrected_word
);

  bch_encoder #(.N(BCH_N), .K(BCH_K)) u_encoder (
    .clk          (clk),
    .rst_n        (rst_n),
    .in_valid     (enc_in_valid),
    .in_bit       (enc_in_bit),
    .out_valid    (enc_out_valid),
    .parity_out   (enc_parity),
    .codeword_out (enc_codeword)
  );

  bch_decoder u_decoder (
    .clk            (clk),
    .rst_n          (rst_n),
    .in_valid       (dec_in_valid),
    .in_bit         (dec_in_bit),
    .in_ready       (dec_in_ready),
    .out_valid      (dec_out_valid),
    .out_bit        (dec_out_bit),
    .out_last       (dec_out_last),
    .done           (dec_done),
    .err_detected   (dec_err_detected),
    .corrected_word (dec_corrected_word)
  );

endmodule
