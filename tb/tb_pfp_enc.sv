// Self-checking test of pfp_enc on every pair of 8-bit LLRs (B sampled).
// Reference: sigma of a value is the largest s <= 4 for which it fits in
// 8 - s two's-complement bits; the pair shares the smaller sigma; the
// significand is the value divided by 2^(4 - sigma), rounded down. Also
// checks that the significand fits in 4 bits and that the decoded value
// is within one quantisation step below the original.
module tb_pfp_enc;
  import turbo_noc_pkg::*;

  int checks = 0, failures = 0;
  bl_llr_t bl;
  pfp_t pfp;

  pfp_enc dut (.bl(bl), .pfp(pfp));

  function automatic int sig_ref(int v);
    for (int s = 4; s > 0; s--)
      if (v >= -(2 ** (7 - s)) && v < 2 ** (7 - s)) return s;
    return 0;
  endfunction

  function automatic int floordiv(int v, int d);
    return (v >= 0) ? v / d : -((-v + d - 1) / d);
  endfunction

  initial begin
    #10_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int s, sa, sb, xa, xb, step;
    for (int a = -128; a < 128; a++) begin
      for (int b = -128; b < 128; b += 5) begin
        bl.a = llr_t'(a);
        bl.b = llr_t'(b);
        #1;
        sa = sig_ref(a);
        sb = sig_ref(b);
        s  = sa < sb ? sa : sb;
        step = 2 ** (4 - s);
        xa = floordiv(a, step);
        xb = floordiv(b, step);
        checks++;
        if (int'(pfp.sigma) != s || int'(pfp.xi_a) != xa || int'(pfp.xi_b) != xb ||
            xa < -8 || xa > 7 || xb < -8 || xb > 7 || a - xa * step >= step) begin
          failures++;
          if (failures < 10) $display("mismatch a=%0d b=%0d got s=%0d xa=%0d xb=%0d exp s=%0d xa=%0d xb=%0d",
                                      a, b, pfp.sigma, pfp.xi_a, pfp.xi_b, s, xa, xb);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
