// Self-checking test of abr_unit: random symbol-level and binary LLR
// vectors and thresholds, compared with a reference that sorts the four
// symbol metrics (reference symbol 00 at 0) and applies the two criteria
// with integer arithmetic.
module tb_abr_unit;
  import turbo_noc_pkg::*;

  int checks = 0, failures = 0;
  logic db_mode;
  logic [K_W-1:0] k_thr;
  sl_llr_t ext, apr;
  logic skip;
  int n_skip = 0;

  abr_unit dut (.db_mode(db_mode), .k_thr(k_thr), .ext(ext), .apr(apr), .skip(skip));

  function automatic int s8(logic [7:0] x);
    return x[7] ? int'(x) - 256 : int'(x);
  endfunction

  // Largest minus second largest of {0, l01, l10, l11}, by selection.
  function automatic int delta_ref(sl_llr_t v);
    int e [4];
    int best, second;
    e[0] = 0; e[1] = s8(v.l01); e[2] = s8(v.l10); e[3] = s8(v.l11);
    best = 0;
    for (int n = 1; n < 4; n++) if (e[n] > e[best]) best = n;
    second = -1000;
    for (int n = 0; n < 4; n++) if (n != best && e[n] > second) second = e[n];
    return e[best] - second;
  endfunction

  function automatic int iabs(int x);
    return x < 0 ? -x : x;
  endfunction

  function automatic llr_t rnd_llr(int span);
    return llr_t'(int'($urandom_range(2 * span)) - span);
  endfunction

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit exp;
    for (int n = 0; n < 4000; n++) begin
      db_mode = n[0];
      k_thr   = K_W'($urandom_range(0, 30));
      ext     = '{rnd_llr(n % 3 == 0 ? 128 : 20), rnd_llr(n % 3 == 0 ? 128 : 20), rnd_llr(n % 3 == 0 ? 128 : 20)};
      apr     = '{rnd_llr(n % 3 == 0 ? 128 : 20), rnd_llr(n % 3 == 0 ? 128 : 20), rnd_llr(n % 3 == 0 ? 128 : 20)};
      if (n % 5 == 0) apr = ext;                // Phi = delta = 0
      #1;
      if (db_mode) exp = iabs(delta_ref(ext) - delta_ref(apr)) < int'(k_thr);
      else         exp = iabs(s8(ext.l01) - s8(apr.l01)) < int'(k_thr);
      checks++;
      if (skip !== exp) begin
        failures++;
        if (failures < 10) $display("mismatch db=%0d K=%0d ext=%p apr=%p skip=%0d exp=%0d", db_mode, k_thr, ext, apr, skip, exp);
      end
      if (skip) n_skip++;
    end
    // K = 0 must never drop.
    k_thr = 0; db_mode = 1; ext = '0; apr = '0; #1;
    checks++; if (skip) failures++;
    checks++; if (n_skip == 0 || n_skip == 4000) failures++;   // both outcomes seen
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
