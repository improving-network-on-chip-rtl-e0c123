// Reference arithmetic for the node and system testbenches, written with
// plain integers independently of the RTL: symbol/bit-level conversions,
// the pseudo-floating-point round trip and the two ABR criteria.
package tb_ref_pkg;

  function automatic int s8(logic [7:0] x);
    return x[7] ? int'(x) - 256 : int'(x);
  endfunction

  function automatic int imax(int a, int b);
    return a > b ? a : b;
  endfunction

  function automatic int iabs(int a);
    return a < 0 ? -a : a;
  endfunction

  function automatic int sat8(int v);
    return v > 127 ? 127 : (v < -128 ? -128 : v);
  endfunction

  // symbol-level (l01, l10, l11) -> bit-level (a, b)
  function automatic void sl2bl(input int l01, input int l10, input int l11, output int a, output int b);
    a = sat8(imax(l10, l11) - imax(0, l01));
    b = sat8(imax(l01, l11) - imax(0, l10));
  endfunction

  // bit-level -> symbol-level, the four sign cases
  function automatic void bl2sl(input int a, input int b, output int l01, output int l10, output int l11);
    int mu;
    mu = imax(a, b);
    if (a >= 0 && b >= 0)     begin l10 = mu - b; l01 = mu - a; l11 = mu; end
    else if (a >= 0 && b < 0) begin l10 = a;      l01 = 0;      l11 = a + b; end
    else if (a < 0 && b >= 0) begin l10 = 0;      l01 = b;      l11 = a + b; end
    else                      begin l10 = a;      l01 = b;      l11 = a + b - mu; end
  endfunction

  function automatic int sig(int v);
    for (int s = 4; s > 0; s--)
      if (v >= -(2 ** (7 - s)) && v < 2 ** (7 - s)) return s;
    return 0;
  endfunction

  function automatic int floordiv(int v, int d);
    return (v >= 0) ? v / d : -((-v + d - 1) / d);
  endfunction

  // PFP encode then decode: what the receiver reconstructs
  function automatic void pfp_round_trip(input int a, input int b, output int ra, output int rb,
                                         output int s, output int xa, output int xb);
    int step;
    s = imax(0, sig(a) < sig(b) ? sig(a) : sig(b));
    step = 2 ** (4 - s);
    xa = floordiv(a, step);
    xb = floordiv(b, step);
    ra = xa * step;
    rb = xb * step;
  endfunction

  function automatic int delta(int l01, int l10, int l11);
    int e [4];
    int best, second;
    e[0] = 0; e[1] = l01; e[2] = l10; e[3] = l11;
    best = 0;
    for (int n = 1; n < 4; n++) if (e[n] > e[best]) best = n;
    second = -1000;
    for (int n = 0; n < 4; n++) if (n != best && e[n] > second) second = e[n];
    return e[best] - second;
  endfunction

  // ABR decision: 1 = value not sent
  function automatic bit skip(bit db, int k, int e01, int e10, int e11, int a01, int a10, int a11);
    if (db) return iabs(delta(e01, e10, e11) - delta(a01, a10, a11)) < k;
    return iabs(e01 - a01) < k;
  endfunction

endpackage
