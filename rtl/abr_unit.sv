// Adaptive bandwidth reduction (ABR) decision.
//
// Decides, for every extrinsic value a SISO produces, whether it is worth
// sending over the network. A value judged reliable is dropped and the
// destination keeps the value it received earlier.
//
// Binary codes (db_mode = 0), as in the paper: delta = |ext - apr| on the
// scalar LLR (field l01); the value is dropped when delta < K.
// Double-binary codes (db_mode = 1), the symbol-level criterion of Muller,
// Baghdadi and Jezequel as restated in the paper: over the symbol LLRs take
// the largest (theta) and second largest (rho) value, Delta = theta - rho, for
// both the a-priori and the extrinsic vector; Phi = |Delta_ext - Delta_apr|;
// the value is dropped when Phi < K.
//
// Design choices: the maxima are taken over the four symbols, the reference
// symbol 00 included with LLR 0 (the paper lists three stored elements and
// uses max{0, .} for the reference elsewhere); all differences are computed
// wide enough that nothing saturates; K = 0 never drops (no ABR).
//
// Purely combinational.
module abr_unit
  import turbo_noc_pkg::*;
(
  input  logic           db_mode,
  input  logic [K_W-1:0] k_thr,
  input  sl_llr_t        ext,
  input  sl_llr_t        apr,
  output logic           skip
);

  // Delta = first maximum - second maximum over {0, l01, l10, l11}; 0..255.
  function automatic logic [LAMBDA_W:0] delta_of(sl_llr_t v);
    logic signed [LAMBDA_W:0] e [4];
    logic signed [LAMBDA_W:0] m1, m2;
    e[0] = '0;
    e[1] = (LAMBDA_W+1)'(v.l01);
    e[2] = (LAMBDA_W+1)'(v.l10);
    e[3] = (LAMBDA_W+1)'(v.l11);
    m1 = e[0];
    m2 = {1'b1, {LAMBDA_W{1'b0}}};   // most negative
    for (int n = 1; n < 4; n++) begin
      if (e[n] > m1) begin
        m2 = m1;
        m1 = e[n];
      end else if (e[n] > m2) begin
        m2 = e[n];
      end
    end
    return (LAMBDA_W+1)'(m1 - m2);
  endfunction

  logic signed [LAMBDA_W:0]   bin_diff;
  logic        [LAMBDA_W:0]   bin_delta;
  logic        [LAMBDA_W:0]   d_ext, d_apr;
  logic signed [LAMBDA_W+1:0] sl_diff;
  logic        [LAMBDA_W+1:0] phi;

  always_comb begin
    bin_diff  = (LAMBDA_W+1)'(ext.l01) - (LAMBDA_W+1)'(apr.l01);
    bin_delta = bin_diff[LAMBDA_W] ? (LAMBDA_W+1)'(-bin_diff) : (LAMBDA_W+1)'(bin_diff);
    d_ext     = delta_of(ext);
    d_apr     = delta_of(apr);
    sl_diff   = $signed({1'b0, d_ext}) - $signed({1'b0, d_apr});
    phi       = sl_diff[LAMBDA_W+1] ? (LAMBDA_W+2)'(-sl_diff) : (LAMBDA_W+2)'(sl_diff);
    if (db_mode) skip = phi < (LAMBDA_W+2)'(k_thr);
    else         skip = bin_delta < (LAMBDA_W+1)'(k_thr);
  end

endmodule
