// Testbench of the codeword buffer: a random bit stream is shifted in with
// random gaps, and every bit must come out exactly 63 shifts after it went in;
// `word` must show the last 63 bits in order.
module tb_codeword_buffer;
  logic        clk = 0;
  logic        shift = 0, in_bit = 0;
  logic        out_bit;
  logic [62:0] word;
  int checks = 0, failures = 0;
  logic hist[$];

  codeword_buffer dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic b;
    logic [62:0] expw;
    @(posedge clk);
    for (int t = 0; t < 3000; t++) begin
      b = $urandom();
      shift  <= ($urandom_range(3) != 0);
      in_bit <= b;
      @(posedge clk);
      #1;
      if (shift) begin
        hist.push_back(b);
        if (hist.size() > 63) void'(hist.pop_front());
      end
      if (hist.size() == 63) begin
        for (int i = 0; i < 63; i++) expw[62 - i] = hist[i];
        checks++;
        if (word !== expw) begin failures++; if (failures < 10) $display("word mismatch at %0d", t); end
        checks++;
        if (out_bit !== hist[0]) begin failures++; if (failures < 10) $display("out_bit mismatch at %0d", t); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
