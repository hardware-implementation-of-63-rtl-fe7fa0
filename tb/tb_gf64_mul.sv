// Exhaustive check of the GF(2^6) multiplier: all 4096 operand pairs against a
// shift-and-add reference, plus the field identities alpha^63 = 1 and
// alpha^6 = 1 + alpha computed by repeated multiplication through the unit.
module tb_gf64_mul;
  import tb_bch_ref_pkg::*;

  gf_t a, b, y;
  int  checks = 0, failures = 0;

  gf64_mul dut (.a(a), .b(b), .y(y));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 64; i++) begin
      for (int j = 0; j < 64; j++) begin
        a = 6'(i); b = 6'(j);
        #1;
        checks++;
        if (y !== ref_mul(a, b)) begin
          failures++;
          if (failures < 10) $display("mismatch %h*%h = %h, expected %h", a, b, y, ref_mul(a, b));
        end
      end
    end
    // powers of alpha through the unit itself
    a = 6'd1;
    b = 6'b000010;
    for (int k = 1; k <= 63; k++) begin
      #1;
      if (k == 6) begin
        checks++;
        if (y !== 6'b000011) begin failures++; $display("alpha^6 = %h", y); end
      end
      if (k == 63) begin
        checks++;
        if (y !== 6'b000001) begin failures++; $display("alpha^63 = %h", y); end
      end else if (k > 0) begin
        checks++;
        if (y === 6'b000001) begin failures++; $display("alpha^%0d = 1, not primitive", k); end
      end
      a = y;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
