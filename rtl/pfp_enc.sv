// Pseudo-floating-point (PFP) encoder for a pair of bit-level LLRs.
//
// Following the paper (after Lee et al.), each 8-bit two's-complement LLR is
// scanned from the MSB for the first 0-1 or 1-0 transition; the bits in
// front of the significand give a shift index sigma. Both LLRs of a symbol
// share sigma = min{sigma[A], sigma[B]}, and each is sent as
//   xi~ = lambda >>> (n_lambda - n_xi - sigma)        (arithmetic shift)
// on n_xi = 4 bits, with sigma on n_sigma = 3 bits: 11 bits instead of 16.
//
// This design counts sigma as the number of redundant sign bits (leading
// bits equal to the sign, minus one) limited to n_lambda - n_xi = 4, the
// reading under which xi~ always fits in n_xi two's-complement bits and
// sigma <= 4 as the paper states. Purely combinational.
module pfp_enc
  import turbo_noc_pkg::*;
(
  input  bl_llr_t bl,
  output pfp_t    pfp
);

  function automatic logic [SIGMA_W-1:0] sigma_of(llr_t v);
    logic [SIGMA_W-1:0] s;
    s = '0;
    for (int n = LAMBDA_W - 2; n >= LAMBDA_W - 1 - int'(SIGMA_MAX); n--) begin
      if (v[n] == v[LAMBDA_W-1] && s == SIGMA_W'(LAMBDA_W - 2 - n)) s = s + 1'b1;
    end
    return s;
  endfunction

  logic [SIGMA_W-1:0] sig_a, sig_b, sig;
  logic [SIGMA_W-1:0] shamt;

  always_comb begin
    sig_a     = sigma_of(bl.a);
    sig_b     = sigma_of(bl.b);
    sig       = (sig_a < sig_b) ? sig_a : sig_b;
    shamt     = SIGMA_W'(SIGMA_MAX) - sig;
    pfp.sigma = sig;
    pfp.xi_a  = XI_W'(bl.a >>> shamt);
    pfp.xi_b  = XI_W'(bl.b >>> shamt);
  end

endmodule
