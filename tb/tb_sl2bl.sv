// Self-checking test of sl2bl: random symbol LLRs (full range and small
// values) against the Max-Log-MAP formulas computed with integers and
// saturated to 8 bits.
module tb_sl2bl;
  import turbo_noc_pkg::*;

  int checks = 0, failures = 0;
  sl_llr_t sl;
  bl_llr_t bl;

  sl2bl dut (.sl(sl), .bl(bl));

  function automatic int imax(int a, int b);
    return a > b ? a : b;
  endfunction
  function automatic int sat8(int v);
    return v > 127 ? 127 : (v < -128 ? -128 : v);
  endfunction

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ea, eb, span;
    for (int n = 0; n < 3000; n++) begin
      span = (n % 2) ? 128 : 16;
      sl.l01 = llr_t'(int'($urandom_range(2 * span - 1)) - span);
      sl.l10 = llr_t'(int'($urandom_range(2 * span - 1)) - span);
      sl.l11 = llr_t'(int'($urandom_range(2 * span - 1)) - span);
      if (n == 0) sl = '{llr_t'(-128), llr_t'(127), llr_t'(127)};   // saturating case
      #1;
      ea = sat8(imax(sl.l10, sl.l11) - imax(0, sl.l01));
      eb = sat8(imax(sl.l01, sl.l11) - imax(0, sl.l10));
      checks++;
      if (int'(bl.a) != ea || int'(bl.b) != eb) begin
        failures++;
        if (failures < 10) $display("mismatch sl=%p got a=%0d b=%0d exp a=%0d b=%0d", sl, bl.a, bl.b, ea, eb);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
