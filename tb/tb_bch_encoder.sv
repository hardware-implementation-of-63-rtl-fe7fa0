// Testbench of the (63,51) BCH encoder. Random messages (and all-zero, all-one
// and single-bit messages) are fed MSB first, some back to back and some with
// idle cycles inside. Each result is compared with long division by g(x), the
// codeword is checked to be a multiple of g(x) by evaluating it at alpha and
// alpha^3, and out_valid must come exactly one cycle after the 51st bit.
module tb_bch_encoder;
  import tb_bch_ref_pkg::*;

  logic        clk = 0, rst_n = 0;
  logic        in_valid = 0, in_bit = 0;
  logic        out_valid;
  logic [11:0] parity_out;
  logic [62:0] codeword_out;
  int checks = 0, failures = 0;
  int cycle = 0;

  bch_encoder dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

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
      if (failures < 20) $display("FAIL %s at cycle %0d par=%h", what, cycle, parity_out);
    end
  endtask

  task automatic send(logic [50:0] m, bit gaps);
    for (int i = 50; i >= 0; i--) begin
      if (gaps && ($urandom_range(3) == 0)) begin
        in_valid <= 0;
        @(posedge clk);
      end
      in_valid <= 1;
      in_bit   <= m[i];
      @(posedge clk);
    end
  endtask

  // Results are collected by a monitor so that back-to-back messages work.
  // It counts the bits the encoder samples and notes the edge of every 51st.
  logic [50:0] expq[$];
  int          lastq[$];
  int          edge_no = 0, nbits = 0;
  always @(posedge clk) if (rst_n) begin
    edge_no++;
    if (out_valid) begin
      logic [50:0] m;
      int          lb;
      check("unexpected out_valid", expq.size() > 0 && lastq.size() > 0);
      if (expq.size() > 0 && lastq.size() > 0) begin
        m  = expq.pop_front();
        lb = lastq.pop_front();
      check("parity", parity_out === ref_parity(m));
      check("codeword", codeword_out === ref_encode(m));
        if (codeword_out !== ref_encode(m)) $display("m=%h cw=%h ref=%h", m, codeword_out, ref_encode(m));
      check("codeword root alpha",   ref_syndrome(codeword_out, 1) == 0);
      check("codeword root alpha^3", ref_syndrome(codeword_out, 3) == 0);
        check("latency one cycle after last bit", edge_no == lb + 1);
      end
    end
    if (in_valid) begin
      nbits++;
      if (nbits == 51) begin
        nbits = 0;
        lastq.push_back(edge_no);
      end
    end
  end

  initial begin
    logic [50:0] m;
    int n;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    check("reset out_valid", out_valid == 0);
    check("reset parity", parity_out == 0);
    n = 0;
    for (int t = 0; t < 300; t++) begin
      if (t == 0) m = '0;
      else if (t == 1) m = '1;
      else if (t < 53) m = 51'd1 << (t - 2);
      else m = rand_msg();
      expq.push_back(m);
      send(m, t % 3 == 2);
      if (t % 7 == 6) begin
        in_valid <= 0;
        @(posedge clk);
      end
      n++;
    end
    in_valid <= 0;
    repeat (4) @(posedge clk);
    check("all messages produced output", expq.size() == 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
