// Pseudo-floating-point (PFP) decoder.
//
// Undoes pfp_enc at the receiving node: each n_xi-bit significand is sign
// extended to n_lambda bits and shifted left by n_lambda - n_xi - sigma,
// zero filling the bits the encoder dropped. The paper gives only the
// encoder; this inverse is the design's own, and it returns every LLR that
// already fits the shared exponent exactly. Purely combinational.
module pfp_dec
  import turbo_noc_pkg::*;
(
  input  pfp_t    pfp,
  output bl_llr_t bl
);

  logic [SIGMA_W-1:0] shamt;
  llr_t               ext_a, ext_b;

  always_comb begin
    shamt = (pfp.sigma > SIGMA_W'(SIGMA_MAX)) ? '0 : SIGMA_W'(SIGMA_MAX) - pfp.sigma;
    ext_a = {{(LAMBDA_W-XI_W){pfp.xi_a[XI_W-1]}}, pfp.xi_a};   // sign extension
    ext_b = {{(LAMBDA_W-XI_W){pfp.xi_b[XI_W-1]}}, pfp.xi_b};
    bl.a  = ext_a <<< shamt;
    bl.b  = ext_b <<< shamt;
  end

endmodule
