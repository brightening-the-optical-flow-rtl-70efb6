// posit_ref_pkg: reference posit arithmetic for the testbenches, written
// independently of the RTL. Posits are decoded bit by bit into a real number
// and results are rounded by searching the ordered set of posit patterns.
// Rounding compares the exact value with the value of the (n+1)-bit pattern
// {lower neighbour, 1}, which is the midpoint in the bit string; this is
// round-to-nearest-even on the posit encoding. Nonzero values never round to
// zero or NaR (they saturate to minpos/maxpos). Exact for n <= 16 with
// double precision reals.
package posit_ref_pkg;

  function automatic longint unsigned pmask(input int n);
    return (n >= 64) ? '1 : ((64'd1 << n) - 1);
  endfunction

  function automatic longint unsigned nar_pattern(input int n);
    return 64'd1 << (n - 1);
  endfunction

  // decode an n-bit posit (NaR decodes to 0; callers test for it)
  function automatic real to_real(input longint unsigned p_in, input int n, input int es);
    longint unsigned p;
    int i, m, k, e, r0, sgn;
    real f, w, v;
    p = p_in & pmask(n);
    if (p == 0 || p == nar_pattern(n)) return 0.0;
    sgn = int'((p >> (n - 1)) & 1);
    if (sgn != 0) p = (~p + 1) & pmask(n);
    i  = n - 2;
    r0 = int'((p >> i) & 1);
    m  = 0;
    while (i >= 0 && int'((p >> i) & 1) == r0) begin
      m++;
      i--;
    end
    k = (r0 != 0) ? m - 1 : -m;
    i--;                                  // terminating bit
    e = 0;
    for (int j = 0; j < es; j++) begin
      e = 2 * e + ((i >= 0) ? int'((p >> i) & 1) : 0);
      i--;
    end
    f = 1.0;
    w = 0.5;
    while (i >= 0) begin
      if (((p >> i) & 1) != 0) f = f + w;
      w = w / 2.0;
      i--;
    end
    v = f * (2.0 ** real'(k * (2 ** es) + e));
    return (sgn != 0) ? -v : v;
  endfunction

  // round a real to the nearest n-bit posit, ties to even
  function automatic longint unsigned from_real(input real x, input int n, input int es);
    longint unsigned lo, hi, md, maxp, r;
    real a, mid;
    if (x == 0.0) return 0;
    a    = (x < 0.0) ? -x : x;
    maxp = pmask(n - 1);
    if (a >= to_real(maxp, n, es)) r = maxp;
    else if (a <= to_real(1, n, es)) r = 1;
    else begin
      lo = 1;
      hi = maxp;                          // invariant: val(lo) <= a < val(hi)
      while (hi - lo > 1) begin
        md = (lo + hi) / 2;
        if (to_real(md, n, es) <= a) lo = md;
        else hi = md;
      end
      if (to_real(lo, n, es) == a) r = lo;
      else begin
        mid = to_real((lo << 1) | 1, n + 1, es);
        if (a < mid) r = lo;
        else if (a > mid) r = hi;
        else r = ((lo & 1) == 0) ? lo : hi;
      end
    end
    if (x < 0.0) r = (~r + 1) & pmask(n);
    return r;
  endfunction

  // round a real to a signed integer of width w, ties to even, saturating
  function automatic longint signed to_int_ref(input real v, input int w);
    real fl, d, r, lim;
    fl  = $floor(v);
    d   = v - fl;
    if (d > 0.5) r = fl + 1.0;
    else if (d < 0.5) r = fl;
    else r = ($floor(fl / 2.0) * 2.0 == fl) ? fl : fl + 1.0;
    lim = 2.0 ** real'(w - 1);
    if (r >= lim) return (longint'(1) <<< (w - 1)) - 1;
    if (r < -lim) return -(longint'(1) <<< (w - 1));
    return longint'(r);
  endfunction

  // expected INT_W-bit PAU result for operation code op (0 add, 1 sub, 2 mul,
  // 3 int2pos, 4 pos2int, otherwise 0); posit results sign-extended
  function automatic longint unsigned expected_result(input int op, input longint unsigned a,
                                                       input longint unsigned b, input int n,
                                                       input int es, input int intw);
    longint unsigned pa, pb, r;
    longint signed ai;
    real va, vb, v;
    pa = a & pmask(n);
    pb = b & pmask(n);
    r  = 0;
    case (op)
      0, 1, 2: begin
        if (pa == nar_pattern(n) || pb == nar_pattern(n)) r = nar_pattern(n);
        else begin
          va = to_real(pa, n, es);
          vb = to_real(pb, n, es);
          v  = (op == 0) ? va + vb : (op == 1) ? va - vb : va * vb;
          r  = from_real(v, n, es);
        end
      end
      3: begin
        ai = longint'(a << (64 - intw)) >>> (64 - intw);
        r  = from_real(real'(ai), n, es);
      end
      4: begin
        if (pa == nar_pattern(n)) return nar_pattern(intw);
        return longint'(to_int_ref(to_real(pa, n, es), intw)) & pmask(intw);
      end
      default: return 0;
    endcase
    if (((r >> (n - 1)) & 1) != 0) r = r | ~pmask(n);   // sign-extend the posit
    return r & pmask(intw);
  endfunction

  // true when |v| lies exactly on the rounding midpoint between two posits
  function automatic bit is_tie(input real v, input int n, input int es);
    longint unsigned r, lo;
    real a;
    a = (v < 0.0) ? -v : v;
    if (a == 0.0) return 0;
    r = from_real(a, n, es);
    if (to_real(r, n, es) == a) return 0;
    lo = (to_real(r, n, es) > a) ? r - 1 : r;
    if (lo < 1) return 0;
    return to_real((lo << 1) | 1, n + 1, es) == a;
  endfunction

endpackage
