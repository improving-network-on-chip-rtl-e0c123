// Symbol-level to bit-level conversion of double-binary extrinsic LLRs.
//
// A double-binary symbol u = AB carries three LLRs relative to the reference
// symbol 00. Under the Max-Log-MAP approximation (paper, Sec. on WiMAX) the
// two bit LLRs are
//   lambda[A] = max{l10, l11} - max{0, l01}
//   lambda[B] = max{l01, l11} - max{0, l10}
// which cuts the network payload from 3 to 2 values.
// The 9-bit differences are saturated to the 8-bit LLR range; the saturation
// is this design's choice (the paper keeps 8-bit BL values without saying
// how). Purely combinational.
module sl2bl
  import turbo_noc_pkg::*;
(
  input  sl_llr_t sl,
  output bl_llr_t bl
);

  function automatic llr_t max2(llr_t x, llr_t y);
    return (x > y) ? x : y;
  endfunction

  localparam logic signed [LAMBDA_W:0] MAXV = (LAMBDA_W+1)'(2**(LAMBDA_W-1) - 1);
  localparam logic signed [LAMBDA_W:0] MINV = -(LAMBDA_W+1)'(2**(LAMBDA_W-1));

  function automatic llr_t sat(logic signed [LAMBDA_W:0] v);
    if (v > MAXV) return MAXV[LAMBDA_W-1:0];
    if (v < MINV) return MINV[LAMBDA_W-1:0];
    return v[LAMBDA_W-1:0];
  endfunction

  llr_t mu_a, mu_na, mu_b, mu_nb;

  always_comb begin
    mu_a  = max2(sl.l10, sl.l11);
    mu_na = max2('0, sl.l01);
    mu_b  = max2(sl.l01, sl.l11);
    mu_nb = max2('0, sl.l10);
    bl.a  = sat((LAMBDA_W+1)'(mu_a) - (LAMBDA_W+1)'(mu_na));
    bl.b  = sat((LAMBDA_W+1)'(mu_b) - (LAMBDA_W+1)'(mu_nb));
  end

endmodule
