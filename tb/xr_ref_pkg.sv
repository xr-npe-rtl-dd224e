// xr_ref_pkg: reference arithmetic for the testbenches, written with real
// numbers and bit lists, independent of the RTL's shifters and encoders.
// to_posit() rounds by extending the exact value's posit bit string and
// rounding to nearest-even at N-1 bits; to_fp4() picks the nearest of the
// eight E2M1 magnitudes (ties to the even code), saturating at 6.
package xr_ref_pkg;

  function automatic bit is_nar(int unsigned code, int n);
    return code == (1 << (n - 1));
  endfunction

  function automatic real pow2(int s);
    real r;
    r = 1.0;
    if (s >= 0) for (int i = 0; i < s; i++) r = r * 2.0;
    else        for (int i = 0; i < -s; i++) r = r / 2.0;
    return r;
  endfunction

  // value of a Posit(n,es) code (NaR returns 0, test it with is_nar)
  function automatic real posit_val(int unsigned code, int n, int es);
    int unsigned x;
    bit neg;
    int i, k, e, nb;
    real f, w;
    if (code == 0 || is_nar(code, n)) return 0.0;
    neg = ((code >> (n - 1)) & 1) != 0;
    x = neg ? ((~code + 1) & ((1 << n) - 1)) : code;
    i = n - 2;
    if (((x >> i) & 1) != 0) begin
      k = -1;
      while (i >= 0 && (((x >> i) & 1) != 0)) begin k++; i--; end
    end else begin
      k = 0;
      while (i >= 0 && (((x >> i) & 1) == 0)) begin k--; i--; end
    end
    i--;  // terminator
    e = 0;
    for (nb = 0; nb < es; nb++) begin
      e = e * 2;
      if (i >= 0) begin e = e + ((x >> i) & 1); i--; end
    end
    f = 1.0;
    w = 0.5;
    while (i >= 0) begin
      if (((x >> i) & 1) != 0) f = f + w;
      w = w / 2.0;
      i--;
    end
    f = f * pow2(k * (1 << es) + e);
    return neg ? -f : f;
  endfunction

  function automatic int posit_scale(int unsigned code, int n, int es);
    real a;
    int s;
    a = posit_val(code, n, es);
    if (a < 0) a = -a;
    if (a == 0.0) return 0;
    s = 0;
    while (a >= 2.0) begin a = a / 2.0; s++; end
    while (a < 1.0)  begin a = a * 2.0; s--; end
    return s;
  endfunction

  function automatic real fp4_val(int unsigned code);
    real mag[8] = '{0.0, 0.5, 1.0, 1.5, 2.0, 3.0, 4.0, 6.0};
    return (((code >> 3) & 1) != 0) ? -mag[code & 7] : mag[code & 7];
  endfunction

  function automatic int unsigned to_posit(real v, int n, int es);
    bit neg;
    real a, f;
    int s, k, e, maxsc, idx;
    bit b[96];
    int unsigned m;
    bit g, st, over;
    if (v == 0.0) return 0;
    neg = v < 0.0;
    a = neg ? -v : v;
    s = 0;
    while (a >= 2.0) begin a = a / 2.0; s++; end
    while (a < 1.0)  begin a = a * 2.0; s--; end
    f = a - 1.0;
    maxsc = (n - 2) * (1 << es);
    over = 0;
    if (s > maxsc)  begin s = maxsc;  f = 0.0; over = 1; end
    if (s < -maxsc) begin s = -maxsc; f = 0.0; end
    k = (s >= 0) ? s / (1 << es) : -((-s + (1 << es) - 1) / (1 << es));
    e = s - k * (1 << es);
    foreach (b[j]) b[j] = 0;
    idx = 0;
    if (k >= 0) begin
      for (int j = 0; j <= k; j++) b[idx++] = 1;
      b[idx++] = 0;
    end else begin
      for (int j = 0; j < -k; j++) b[idx++] = 0;
      b[idx++] = 1;
    end
    for (int j = es - 1; j >= 0; j--) b[idx++] = ((e >> j) & 1) != 0;
    while (idx < 90) begin
      f = f * 2.0;
      if (f >= 1.0) begin b[idx] = 1; f = f - 1.0; end
      idx++;
    end
    m = 0;
    for (int j = 0; j < n - 1; j++) m = m * 2 + b[j];
    g = b[n - 1];
    st = (f > 0.0);
    for (int j = n; j < 96; j++) st = st | b[j];
    if (g && (st || ((m & 1) != 0)) && !over) m = m + 1;
    return neg ? ((~m + 1) & ((1 << n) - 1)) : m;
  endfunction

  function automatic int unsigned to_fp4(real v);
    real mag[8] = '{0.0, 0.5, 1.0, 1.5, 2.0, 3.0, 4.0, 6.0};
    real a, d, bd;
    int best;
    a = (v < 0.0) ? -v : v;
    best = 0;
    bd = a;
    for (int c = 1; c < 8; c++) begin
      d = (a > mag[c]) ? a - mag[c] : mag[c] - a;
      if (d < bd || (d == bd && (c % 2 == 0))) begin bd = d; best = c; end
    end
    if (best == 0) return 0;
    return (v < 0.0) ? (8 + best) : best;
  endfunction

  // lane helpers: prec 0 FP4, 1 P4, 2 P8, 3 P16
  function automatic int nlanes(int p);
    return (p == 2) ? 2 : (p == 3) ? 1 : 4;
  endfunction
  function automatic int lbits(int p);
    return (p == 2) ? 8 : (p == 3) ? 16 : 4;
  endfunction
  function automatic real lane_val(int p, int unsigned code);
    case (p)
      0: return fp4_val(code);
      1: return posit_val(code, 4, 1);
      2: return posit_val(code, 8, 0);
      default: return posit_val(code, 16, 1);
    endcase
  endfunction
  function automatic bit lane_nar(int p, int unsigned code);
    return (p != 0) && is_nar(code, lbits(p));
  endfunction
  function automatic int unsigned lane_round(int p, real v);
    case (p)
      0: return to_fp4(v);
      1: return to_posit(v, 4, 1);
      2: return to_posit(v, 8, 0);
      default: return to_posit(v, 16, 1);
    endcase
  endfunction
endpackage
