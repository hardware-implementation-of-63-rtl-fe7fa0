// End-to-end testbench of the (63,51) BCH codec at its default (and only)
// size. Random 51-bit messages go into the encoder back to back; every
// codeword it produces is checked against the reference encoder, then passes
// through a channel model that flips 0, 1 or 2 random bits and feeds it to the
// decoder r62 first, waiting whenever the decoder is not ready. The decoded
// word must equal the transmitted codeword, and its top 51 bits the message.
// It counts each mechanism: clean words (zero syndromes, correction disabled),
// single- and double-error corrections, cycles the channel was held back by
// the decoder, and encoder messages that started right after the previous one;
// a mechanism that never happened counts as a failure.
module tb_bch_codec;
  import tb_bch_ref_pkg::*;

  logic        clk = 0, rst_n = 0;
  logic        enc_in_valid = 0, enc_in_bit = 0;
  logic        enc_out_valid;
  logic [11:0] enc_parity;
  logic [62:0] enc_codeword;
  logic        dec_in_valid = 0, dec_in_bit = 0;
  logic        dec_in_ready;
  logic        dec_out_valid, dec_out_bit, dec_out_last, dec_done, dec_err_detected;
  logic [62:0] dec_corrected_word;

  int checks = 0, failures = 0;
  localparam int NWORDS = 600;

  bch_codec dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (NWORDS * 140 + 2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  logic [50:0] msgq[$];          // messages sent, awaiting the encoder
  logic [62:0] txq[$];           // encoded words, awaiting the channel
  logic [62:0] sentq[$];         // words given to the decoder, awaiting results
  int          nerrq[$];
  int n_clean = 0, n_single = 0, n_double = 0, n_stall = 0, n_b2b = 0, n_decoded = 0;

  // transmitter: NWORDS messages, back to back except for occasional pauses
  initial begin
    logic [50:0] m;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int t = 0; t < NWORDS; t++) begin
      m = rand_msg();
      msgq.push_back(m);
      if (t > 0 && (t % 4 != 0)) n_b2b++;
      for (int i = 50; i >= 0; i--) begin
        enc_in_valid <= 1;
        enc_in_bit   <= m[i];
        @(posedge clk);
      end
      if (t % 4 == 3) begin
        enc_in_valid <= 0;
        repeat (1 + $urandom_range(20)) @(posedge clk);
      end
    end
    enc_in_valid <= 0;
  end

  // encoder output monitor
  always @(posedge clk) if (rst_n && enc_out_valid) begin
    logic [50:0] m;
    check("encoder output expected", msgq.size() > 0);
    if (msgq.size() > 0) begin
      m = msgq.pop_front();
      check("encoder codeword", enc_codeword === ref_encode(m));
      check("encoder parity", enc_parity === enc_codeword[11:0]);
      txq.push_back(enc_codeword);
    end
  end

  // channel: adds errors and feeds the decoder, stalling while it is busy
  initial begin
    logic [62:0] c, r;
    int unsigned p1, p2;
    int k;
    int nerr;
    @(posedge rst_n);
    for (int t = 0; t < NWORDS; t++) begin
      while (txq.size() == 0) @(posedge clk);
      c = txq.pop_front();
      nerr = t % 3;
      r = c;
      if (nerr == 1) r[$urandom_range(62)] ^= 1;
      if (nerr == 2) begin rand_two_pos(p1, p2); r[p1] ^= 1; r[p2] ^= 1; end
      sentq.push_back(c);
      nerrq.push_back(nerr);
      k = 62;
      while (k >= 0) begin
        dec_in_valid <= 1;
        dec_in_bit   <= r[k];
        @(posedge clk);
        if (dec_in_ready) k--;
        else n_stall++;
      end
      dec_in_valid <= 0;
    end
  end

  // decoder output monitor
  always @(posedge clk) if (rst_n && dec_done) begin
    logic [62:0] c;
    int nerr;
    check("decoder result expected", sentq.size() > 0);
    if (sentq.size() > 0) begin
      c    = sentq.pop_front();
      nerr = nerrq.pop_front();
      check("decoded word equals transmitted codeword", dec_corrected_word === c);
      check("recovered message", dec_corrected_word[62:12] === c[62:12]);
      check("error detection flag", dec_err_detected == (nerr != 0));
      if (dec_corrected_word === c) begin
        case (nerr)
          0: n_clean++;
          1: n_single++;
          default: n_double++;
        endcase
      end
      n_decoded++;
    end
  end

  initial begin
    wait (n_decoded == NWORDS);
    repeat (5) @(posedge clk);
    check("clean words passed through", n_clean > 0);
    check("single errors corrected", n_single > 0);
    check("double errors corrected", n_double > 0);
    check("decoder back-pressure held the channel", n_stall > 0);
    check("back-to-back encoder messages", n_b2b > 0);
    check("no results left over", sentq.size() == 0 && msgq.size() == 0);
    $display("clean %0d, single %0d, double %0d, stall cycles %0d, back-to-back messages %0d",
             n_clean, n_single, n_double, n_stall, n_b2b);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
