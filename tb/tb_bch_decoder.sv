// Testbench of the (63,51) BCH decoder. Codewords from the reference encoder
// are sent with 0, 1 or 2 bit errors at random or at the end positions, r62
// first. Both the serial output and the parallel corrected word must equal the
// transmitted codeword, err_detected must tell clean from corrupted words, and
// the timing must be: in_ready low from the cycle after the 63rd bit, first
// corrected bit 66 cycles after the first received bit, done 128 cycles after
// it, and the next word accepted on that cycle. Words with three errors are
// also sent to check that the decoder reports an error and returns to accept
// the next word (their output is not defined by a t = 2 code).
module tb_bch_decoder;
  import tb_bch_ref_pkg::*;

  logic        clk = 0, rst_n = 0;
  logic        in_valid = 0, in_bit = 0;
  logic        in_ready;
  logic        out_valid, out_bit, out_last, done, err_detected;
  logic [62:0] corrected_word;
  int checks = 0, failures = 0;
  int edge_no = 0;
  int n_err[4] = '{0, 0, 0, 0};

  bch_decoder dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) edge_no++;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at edge %0d", what, edge_no);
    end
  endtask

  // Sends r, waits for the result and checks it against c (if nerr <= 2).
  task automatic decode(logic [62:0] c, logic [62:0] r, int nerr);
    int start_edge, first_out, done_edge;
    logic [62:0] serial;
    int nout;
    first_out = -1;
    done_edge = -1;
    nout = 0;
    serial = '0;
    // wait until the decoder is ready (sample after the edge)
    while (!in_ready) begin @(posedge clk); #1; end
    for (int j = 62; j >= 0; j--) begin
      in_valid <= 1;
      in_bit   <= r[j];
      @(posedge clk);
      if (j == 62) start_edge = edge_no;
      #1;
      if (j > 0) check("ready while receiving", in_ready);
    end
    in_valid <= 0;
    check("not ready after 63 bits", !in_ready);
    while (done_edge < 0) begin
      @(posedge clk);
      #1;
      if (out_valid) begin
        if (first_out < 0) first_out = edge_no;
        serial = {serial[61:0], out_bit};
        nout++;
        check("out_last only with the 63rd bit", out_last == (nout == 63));
      end
      if (done) done_edge = edge_no;
      if (edge_no - start_edge > 300) break;
    end
    check("63 serial bits", nout == 63);
    check("first corrected bit 66 cycles after first input", first_out - start_edge == 66);
    check("done 128 cycles after first input", done_edge - start_edge == 128);
    check("ready again with done", in_ready);
    check("err_detected", err_detected == (nerr != 0));
    if (nerr <= 2) begin
      check("serial output is the codeword", serial === c);
      check("corrected_word is the codeword", corrected_word === c);
      if (corrected_word !== c) $display("  nerr=%0d got %h want %h", nerr, corrected_word, c);
    end
    n_err[nerr]++;
  endtask

  initial begin
    logic [62:0] c, r;
    int unsigned p1, p2, p3;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    #1;
    check("ready after reset", in_ready && !out_valid && !done);
    // end positions
    c = ref_encode(rand_msg());
    r = c; r[62] ^= 1; decode(c, r, 1);
    r = c; r[0]  ^= 1; decode(c, r, 1);
    r = c; r[62] ^= 1; r[0] ^= 1; decode(c, r, 2);
    r = c; r[1] ^= 1; r[61] ^= 1; decode(c, r, 2);
    for (int t = 0; t < 400; t++) begin
      c = ref_encode(rand_msg());
      r = c;
      case (t % 4)
        0: decode(c, r, 0);
        1: begin r[$urandom_range(62)] ^= 1; decode(c, r, 1); end
        2: begin rand_two_pos(p1, p2); r[p1] ^= 1; r[p2] ^= 1; decode(c, r, 2); end
        default: begin
          if (t % 8 == 7) begin
            rand_two_pos(p1, p2);
            do p3 = $urandom_range(62); while (p3 == p1 || p3 == p2);
            r[p1] ^= 1; r[p2] ^= 1; r[p3] ^= 1;
            decode(c, r, 3);
          end else begin
            rand_two_pos(p1, p2); r[p1] ^= 1; r[p2] ^= 1; decode(c, r, 2);
          end
        end
      endcase
      // sometimes leave idle cycles between words
      if (t % 5 == 0) repeat ($urandom_range(3)) @(posedge clk);
    end
    check("all error counts exercised", n_err[0] > 0 && n_err[1] > 0 && n_err[2] > 0 && n_err[3] > 0);
    $display("words with 0/1/2/3 errors: %0d %0d %0d %0d", n_err[0], n_err[1], n_err[2], n_err[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
