// Testbench of the syndrome calculator. Codewords (syndromes all zero), words
// with 1, 2 or 3 random bit errors and fully random words are shifted in r62
// first, back to back or with idle cycles; S1, S2, S3 are compared with direct
// evaluation of r(alpha^i) on the cycle after the 63rd bit.
module tb_syndrome_calc;
  import tb_bch_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_first = 0, in_bit = 0;
  gf_t  s1, s2, s3;
  int checks = 0, failures = 0;
  int zero_words = 0;

  syndrome_calc dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
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

  initial begin
    logic [62:0] r;
    int unsigned p1, p2;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    check("reset", s1 == 0 && s2 == 0 && s3 == 0);
    for (int t = 0; t < 400; t++) begin
      r = ref_encode(rand_msg());
      case (t % 5)
        0: ;
        1: r[$urandom_range(62)] ^= 1'b1;
        2: begin rand_two_pos(p1, p2); r[p1] ^= 1'b1; r[p2] ^= 1'b1; end
        3: begin rand_two_pos(p1, p2); r[p1] ^= 1'b1; r[p2] ^= 1'b1; r[$urandom_range(62)] ^= 1'b1; end
        default: r = {$urandom(), $urandom()};
      endcase
      for (int j = 62; j >= 0; j--) begin
        if (t % 2 == 1 && $urandom_range(4) == 0) begin
          in_valid <= 0;
          @(posedge clk);
        end
        in_valid <= 1;
        in_first <= (j == 62);
        in_bit   <= r[j];
        @(posedge clk);
      end
      in_valid <= 0;
      in_first <= 0;
      #1;
      check("S1", s1 === ref_syndrome(r, 1));
      check("S2", s2 === ref_syndrome(r, 2));
      check("S3", s3 === ref_syndrome(r, 3));
      if (t % 5 == 0) begin
        check("codeword gives zero syndromes", s1 == 0 && s2 == 0 && s3 == 0);
        zero_words++;
      end
      if (t % 3 == 0) @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
