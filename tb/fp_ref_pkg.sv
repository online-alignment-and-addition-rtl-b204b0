// fp_ref_pkg: reference models and stimulus generators for the multi-term
// adder testbenches. Everything here works on plain integers at run time
// (format widths are arguments), independently of the RTL:
//
//   ref_decode  value of one encoding as (exponent, signed fraction << g)
//   ref_tree    the align-and-add tree evaluated with floor division by
//               powers of two, level by level, for any radix list
//   ref_round   round-to-nearest-even of o * 2^(lam - bias - mw - g) into
//               the format, with subnormals, overflow to infinity and the
//               special-value flags; reports which cases it met
//   gen_vector  N random encodings of one of several stimulus classes
package fp_ref_pkg;

  // event bits reported by ref_round
  localparam int EV_SUBNORMAL = 0;
  localparam int EV_OVERFLOW  = 1;
  localparam int EV_ROUND_UP  = 2;
  localparam int EV_RENORM    = 3;
  localparam int EV_ZERO      = 4;
  localparam int EV_SPECIAL   = 5;
  localparam int EV_NEGATIVE  = 6;
  localparam int EV_CANCEL    = 7;   // result exponent below the max exponent
  localparam int NUM_EV       = 8;

  // number of stimulus classes of gen_vector
  localparam int NUM_MODES = 8;

  typedef bit [63:0] word_t;

  function automatic longint floor_shift(longint v, int d);
    longint p, q;
    if (d >= 62) return (v < 0) ? -1 : 0;
    p = longint'(1) <<< d;
    q = v / p;
    if (v < 0 && q * p != v) q = q - 1;
    return q;
  endfunction

  function automatic void ref_decode(word_t w, int ew, int mw, int g,
                                     output int e, output longint m,
                                     output bit sgn, output bit inf, output bit nan);
    int ef;
    longint fr;
    sgn = w[ew+mw];
    ef  = int'((w >> mw) & ((64'd1 << ew) - 1));
    fr  = longint'(w & ((64'd1 << mw) - 1));
    inf = 0;
    nan = 0;
    if (ef == (1 << ew) - 1) begin
      inf = (fr == 0);
      nan = (fr != 0);
      e = 1;
      m = 0;
      return;
    end
    if (ef == 0) begin
      e = 1;
      m = fr;
    end else begin
      e = ef;
      m = fr + (longint'(1) <<< mw);
    end
    m = m * (longint'(1) <<< g);
    if (sgn) m = -m;
  endfunction

  // Evaluate the tree for terms (e[k], m[k]); radix[l] is the radix of level l.
  // realign counts partial sums (not leaves) that had to be shifted again.
  function automatic void ref_tree(int e[], longint m[], int radix[],
                                   output int lam, output longint o,
                                   output int realign, output int saturated,
                                   input int w);
    int     le[$];
    longint lo[$];
    int     ne[$];
    longint no[$];
    realign = 0;
    saturated = 0;
    foreach (e[k]) begin
      le.push_back(e[k]);
      lo.push_back(m[k]);
    end
    foreach (radix[l]) begin
      ne.delete();
      no.delete();
      for (int b = 0; b < le.size(); b += radix[l]) begin
        int mx;
        longint s;
        mx = le[b];
        for (int k = 1; k < radix[l]; k++) if (le[b+k] > mx) mx = le[b+k];
        s = 0;
        for (int k = 0; k < radix[l]; k++) begin
          if (l > 0 && mx != le[b+k] && lo[b+k] != 0) realign++;
          if (mx - le[b+k] >= w) saturated++;
          s += floor_shift(lo[b+k], mx - le[b+k]);
        end
        ne.push_back(mx);
        no.push_back(s);
      end
      le = ne;
      lo = no;
    end
    lam = le[0];
    o   = lo[0];
  endfunction

  function automatic word_t ref_round(int lam, longint o, int ew, int mw, int g,
                                      bit nan, bit pinf, bit ninf, output int ev);
    bit     neg;
    longint a, k, rem, half;
    int     p, eb, eeff, ue, q0, t;
    word_t  r;
    ev = 0;
    if (nan || (pinf && ninf)) begin
      ev |= 1 << EV_SPECIAL;
      return (word_t'((1 << ew) - 1) << mw) | (word_t'(1) << (mw - 1));
    end
    if (pinf || ninf) begin
      ev |= 1 << EV_SPECIAL;
      return (word_t'(ninf) << (ew + mw)) | (word_t'((1 << ew) - 1) << mw);
    end
    if (o == 0) begin
      ev |= 1 << EV_ZERO;
      return 0;
    end
    neg = (o < 0);
    a   = neg ? -o : o;
    if (neg) ev |= 1 << EV_NEGATIVE;
    p = 0;
    while ((a >> (p + 1)) != 0) p++;
    q0   = lam - mw - g;          // biased exponent of the LSB, minus mw
    eb   = p + q0;                // biased exponent if normal
    eeff = (eb < 1) ? 1 : eb;
    ue   = eeff - mw;             // exponent (same units) of the result ulp
    if (q0 >= ue) begin
      k = a <<< (q0 - ue);
    end else begin
      t    = ue - q0;
      k    = (t >= 63) ? 0 : (a >>> t);
      rem  = (t >= 63) ? a : (a & ((longint'(1) <<< t) - 1));
      half = longint'(1) <<< (t - 1);
      if (rem > half || (rem == half && k[0])) begin
        k++;
        ev |= 1 << EV_ROUND_UP;
      end
    end
    if (k == (longint'(1) <<< (mw + 1))) begin
      k = k >>> 1;
      eeff++;
      ev |= 1 << EV_RENORM;
    end
    if (eeff < lam && k >= (longint'(1) <<< mw)) ev |= 1 << EV_CANCEL;
    if (k < (longint'(1) <<< mw)) begin
      ev |= 1 << EV_SUBNORMAL;
      r = (word_t'(neg) << (ew + mw)) | word_t'(k);
    end else if (eeff >= (1 << ew) - 1) begin
      ev |= 1 << EV_OVERFLOW;
      r = (word_t'(neg) << (ew + mw)) | (word_t'((1 << ew) - 1) << mw);
    end else begin
      r = (word_t'(neg) << (ew + mw)) | (word_t'(eeff) << mw) |
          word_t'(k - (longint'(1) <<< mw));
    end
    return r;
  endfunction

  function automatic word_t make_word(bit s, int e, longint f, int ew, int mw);
    return (word_t'(s) << (ew + mw)) | (word_t'(e) << mw) |
           (word_t'(f) & ((word_t'(1) << mw) - 1));
  endfunction

  function automatic longint rnd_frac(int mw);
    return longint'({$urandom, $urandom}) & ((longint'(1) <<< mw) - 1);
  endfunction

  // One vector of n encodings of stimulus class 'mode':
  //   0 random finite   1 exponents within g of each other (no bits lost)
  //   2 cancelling pairs   3 near overflow   4 tiny / subnormal
  //   5 with infinity or NaN   6 zeros   7 very wide exponent spread
  function automatic void gen_vector(int mode, int n, int ew, int mw, int g,
                                     output word_t v[]);
    int emax, base;
    emax = (1 << ew) - 2;
    v = new[n];
    base = 1 + int'($urandom % emax);
    for (int i = 0; i < n; i++) begin
      int e;
      case (mode)
        1: begin
          e = base - int'($urandom % (g + 1));
          if (e < 1) e = 1;
          v[i] = make_word($urandom % 2, e, rnd_frac(mw), ew, mw);
        end
        2: begin
          if (i % 2 == 0) v[i] = make_word($urandom % 2, base, rnd_frac(mw), ew, mw);
          else            v[i] = v[i-1] ^ (word_t'(1) << (ew + mw));
          if (i == n - 1 && ($urandom % 2))
            v[i] = make_word($urandom % 2, (base > 3 * mw) ? base - 3 * mw : 1,
                             rnd_frac(mw), ew, mw);
        end
        3: begin
          e = emax - int'($urandom % 2);
          v[i] = make_word(($urandom % 8) == 0, e, rnd_frac(mw), ew, mw);
        end
        4: v[i] = make_word($urandom % 2, int'($urandom % 3), rnd_frac(mw), ew, mw);
        5: begin
          e = 1 + int'($urandom % emax);
          v[i] = make_word($urandom % 2, e, rnd_frac(mw), ew, mw);
          if ($urandom % 8 == 0)
            v[i] = make_word($urandom % 2, emax + 1,
                             ($urandom % 2) ? rnd_frac(mw) : 0, ew, mw);
        end
        6: v[i] = ($urandom % 4 == 0) ? make_word($urandom % 2, 1, rnd_frac(mw), ew, mw)
                                      : make_word($urandom % 2, 0, 0, ew, mw);
        7: begin
          e = ($urandom % 2) ? emax : 1 + int'($urandom % 4);
          v[i] = make_word($urandom % 2, e, rnd_frac(mw), ew, mw);
        end
        default: begin
          e = int'($urandom % (emax + 1));
          v[i] = make_word($urandom % 2, e, rnd_frac(mw), ew, mw);
        end
      endcase
    end
    if (mode == 5) v[$urandom % n] = make_word($urandom % 2, emax + 1,
                                               ($urandom % 3 == 0) ? 1 : 0, ew, mw);
  endfunction

  // Full reference of the adder for one vector: returns the expected word.
  function automatic word_t ref_adder(word_t v[], int ew, int mw, int g, int radix[],
                                      output int ev, output int realign,
                                      output int saturated);
    int     e[];
    longint m[];
    bit     s, inf, nan, anynan, pinf, ninf;
    int     lam, w, logn;
    longint o;
    e = new[v.size()];
    m = new[v.size()];
    anynan = 0; pinf = 0; ninf = 0;
    logn = $clog2(v.size());
    w = 2 + logn + mw + g;
    foreach (v[i]) begin
      ref_decode(v[i], ew, mw, g, e[i], m[i], s, inf, nan);
      anynan |= nan;
      pinf   |= inf && !s;
      ninf   |= inf && s;
    end
    ref_tree(e, m, radix, lam, o, realign, saturated, w);
    return ref_round(lam, o, ew, mw, g, anynan, pinf, ninf, ev);
  endfunction

  // Exactly rounded sum, valid when all exponents lie within g of the maximum.
  function automatic word_t ref_exact(word_t v[], int ew, int mw, int g);
    int     e[];
    longint m[];
    bit     s, inf, nan;
    int     emin, ev;
    longint acc;
    e = new[v.size()];
    m = new[v.size()];
    emin = 1 << 30;
    foreach (v[i]) begin
      ref_decode(v[i], ew, mw, g, e[i], m[i], s, inf, nan);
      if (e[i] < emin) emin = e[i];
    end
    acc = 0;
    foreach (v[i]) acc += m[i] <<< (e[i] - emin);
    return ref_round(emin, acc, ew, mw, g, 0, 0, 0, ev);
  endfunction

endpackage
