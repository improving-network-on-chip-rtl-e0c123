// Bit-level to symbol-level conversion of double-binary LLRs.
//
// Rebuilds the three symbol LLRs the double-binary SISO works with from the
// bit pair lambda[A], lambda[B], with mu_AB = max{lambda[A], lambda[B]}, in
// the four sign cases given by the paper:
//   A>=0, B>=0 : l10 = mu_AB - B, l01 = mu_AB - A, l11 = mu_AB
//   A>=0, B<0  : l10 = A,         l01 = 0,         l11 = A + B
//   A<0,  B>=0 : l10 = 0,         l01 = B,         l11 = A + B
//   A<0,  B<0  : l10 = A,         l01 = B,         l11 = A + B - mu_AB
// With 8-bit inputs every result fits in 8 bits (A + B only appears with
// opposite signs, and A + B - mu_AB = min{A, B}), so no saturation is needed.
// Purely combinational.
module bl2sl
  import turbo_noc_pkg::*;
(
  input  bl_llr_t bl,
  output sl_llr_t sl
);

  llr_t mu_ab;

  always_comb begin
    mu_ab = (bl.a > bl.b) ? bl.a : bl.b;
    unique case ({bl.a[LAMBDA_W-1], bl.b[LAMBDA_W-1]})
      2'b00: begin
        sl.l10 = mu_ab - bl.b;
        sl.l01 = mu_ab - bl.a;
        sl.l11 = mu_ab;
      end
      2'b01: begin
        sl.l10 = bl.a;
        sl.l01 = '0;
        sl.l11 = bl.a + bl.b;
      end
      2'b10: begin
        sl.l10 = '0;
        sl.l01 = bl.b;
        sl.l11 = bl.a + bl.b;
      end
      default: begin
        sl.l10 = bl.a;
        sl.l01 = bl.b;
        sl.l11 = bl.a + bl.b - mu_ab;
      end
    endcase
  end

endmodule
