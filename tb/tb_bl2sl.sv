// Self-checking test of bl2sl: every pair of 8-bit bit-level LLRs is
// converted and compared with the four-case table, evaluated on integers.
module tb_bl2sl;
  import turbo_noc_pkg::*;

  int checks = 0, failures = 0;
  bl_llr_t bl;
  sl_llr_t sl;

  bl2sl dut (.bl(bl), .sl(sl));

  initial begin
    #10_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int a, b, mu, e10, e01, e11;
    for (a = -128; a < 128; a++) begin
      for (b = -128; b < 128; b += 3) begin
        bl.a = llr_t'(a);
        bl.b = llr_t'(b);
        #1;
        mu = a > b ? a : b;
        if (a >= 0 && b >= 0)     begin e10 = mu - b; e01 = mu - a; e11 = mu; end
        else if (a >= 0 && b < 0) begin e10 = a;      e01 = 0;      e11 = a + b; end
        else if (a < 0 && b >= 0) begin e10 = 0;      e01 = b;      e11 = a + b; end
        else                      begin e10 = a;      e01 = b;      e11 = a + b - mu; end
        checks++;
        if (int'(sl.l10) != e10 || int'(sl.l01) != e01 || int'(sl.l11) != e11) begin
          failures++;
          if (failures < 10) $display("mismatch a=%0d b=%0d got %p", a, b, sl);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
