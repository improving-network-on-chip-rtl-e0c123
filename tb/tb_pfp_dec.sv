// Self-checking test of pfp_dec: every significand pair and every shift
// index 0..4 is expanded and compared with xi * 2^(4 - sigma).
module tb_pfp_dec;
  import turbo_noc_pkg::*;

  int checks = 0, failures = 0;
  pfp_t pfp;
  bl_llr_t bl;

  pfp_dec dut (.pfp(pfp), .bl(bl));

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s <= 4; s++)
      for (int xa = -8; xa < 8; xa++)
        for (int xb = -8; xb < 8; xb++) begin
          pfp.sigma = SIGMA_W'(s);
          pfp.xi_a  = XI_W'(xa);
          pfp.xi_b  = XI_W'(xb);
          #1;
          checks++;
          if (int'(bl.a) != xa * (2 ** (4 - s)) || int'(bl.b) != xb * (2 ** (4 - s))) begin
            failures++;
            if (failures < 10) $display("mismatch s=%0d xa=%0d xb=%0d got %0d %0d", s, xa, xb, bl.a, bl.b);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
