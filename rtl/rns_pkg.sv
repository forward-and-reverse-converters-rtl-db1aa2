// rns_pkg: constants and elaboration-time helpers shared by the converters of
// the residue number system tau+ = {m1, m2, m3} = {2^(2q+1), 3*2^(q-1)-1,
// 3*2^(q-1)+1}.
//
// Nothing here describes hardware by itself. The functions are evaluated
// while the design elaborates and decide
//   * the moduli and the Chinese-remainder constants for a given q,
//   * the weighted-bit matrix that the reverse converter adds up (which input
//     bit, true or inverted, lands in which column, and the constant row),
//   * the shape of the carry-save reduction tree: how many full and half
//     adders sit in each column of each level, and where carries that leave
//     the top column re-enter.
// Wide integers (up to 72 bits) are used so that q up to 32 can be evaluated
// (the reverse converter has been simulated at q = 4, 5, 6, 8, 16 and 32).
// The plan and table are single wide vectors (tens of kilobits) so that a
// module computes them once; lint notes the wide zero initialisations and
// that each accessor reads only its slice of them.
package rns_pkg;

  typedef logic [71:0] big_t;

  localparam int MAXC = 72;   // most columns a reduction tree may have
  localparam int MAXL = 16;   // most levels a reduction tree may have

  // Column heights of a bit matrix, 8 bits per column, column 0 lowest.
  typedef logic [MAXC*8-1:0] hvec_t;

  // ------------------------------------------------------------------
  // Moduli
  // ------------------------------------------------------------------
  function automatic big_t mod_m1(int q);
    return big_t'(1) << (2*q+1);
  endfunction

  // m2 = 2^q + 2^(q-1) - 1, m3 = 2^q + 2^(q-1) + 1
  function automatic big_t mod_mi(int q, bit plus);
    big_t t = (big_t'(3) << (q-1));
    return plus ? t + 1 : t - 1;
  endfunction

  // m2*m3 = 2^(2q+1) + 2^(2q-2) - 1
  function automatic big_t mod_m23(int q);
    return (big_t'(1) << (2*q+1)) + (big_t'(1) << (2*q-2)) - 1;
  endfunction

  function automatic big_t addmod(big_t a, big_t b, big_t m);
    big_t s = a + b;
    return (s >= m) ? s - m : s;
  endfunction

  // a*b mod m by shift-and-add; a, b < m
  function automatic big_t mulmod(big_t a, big_t b, big_t m);
    big_t r = 0;
    for (int i = 71; i >= 0; i--) begin
      r = addmod(r, r, m);
      if (b[i]) r = addmod(r, a, m);
    end
    return r;
  endfunction

  // |2^e * z|_m for z < 2^(e..), by doubling
  function automatic big_t shlmod(big_t z, int e, big_t m);
    big_t r = z % m;
    for (int i = 0; i < e; i++) r = addmod(r, r, m);
    return r;
  endfunction

  function automatic int popc(big_t v);
    int n = 0;
    for (int i = 0; i < 72; i++) n += int'(v[i]);
    return n;
  endfunction

  // ------------------------------------------------------------------
  // Reverse-converter constants
  //   X  = x1 + 2^(2q+1) * X'
  //   X' = | A*x2 + B*x3 - mu1*x1 |_(m2 m3)
  // mu1 = 9*2^(2q-5)+1 is the inverse of m1 modulo m2*m3 and
  // mu2 = 3*2^(q-2) the inverse of m3 modulo m2 (both from the paper);
  // A = mu1*mu2*m3, B = mu1 - A (all modulo m2*m3).
  // ------------------------------------------------------------------
  function automatic big_t rev_mu1(int q);
    return (big_t'(9) << (2*q-5)) + 1;
  endfunction

  function automatic big_t rev_mu2(int q);
    return big_t'(3) << (q-2);
  endfunction

  function automatic big_t rev_coef(int q, int which);
    big_t M  = mod_m23(q);
    big_t u1 = rev_mu1(q);
    big_t a  = mulmod(mulmod(u1, rev_mu2(q), M), mod_mi(q, 1'b1), M);
    case (which)
      0:       return a;                       // weight of x2
      1:       return (u1 + M - a) % M;        // weight of x3
      default: return (M - u1) % M;            // weight of x1
    endcase
  endfunction

  // Source bits are numbered: x2[0..q], then x3[0..q], then x1[0..2q].
  localparam int MAXS = 136;
  function automatic int rev_nsrc(int q);
    return 2*(q+1) + 2*q+1;
  endfunction

  // Table of all source bits, computed once: at [s*144 +: 72] the columns
  // where bit s enters true, at [s*144+72 +: 72] the columns where it
  // enters inverted.
  // A source bit b has weight W = |coef*2^i|_M. W, or -(M-W), is written
  // as a sum of signed powers of two: plain binary or the non-adjacent form
  // (NAF), whichever has the fewest nonzero digits and fits the 2q+1
  // columns. A digit +2^j puts b in column j; a digit -2^j puts ~b in
  // column j and leaves the constant -2^j (-b = ~b - 1).
  typedef logic [MAXS*144-1:0] rtab_t;

  // digits of v: {neg mask, pos mask}; bit 143 set if a digit is >= 2^n
  function automatic logic [143:0] naf_digits(big_t v, int n);
    logic [143:0] d = '0;
    logic [73:0] x = 74'(v);
    for (int j = 0; j < 72; j++) begin
      if (x[0]) begin
        if (x[1]) begin x = x + 1; if (j < n) d[72+j] = 1'b1; else d[143] = 1'b1; end
        else      begin x = x - 1; if (j < n) d[j] = 1'b1;    else d[143] = 1'b1; end
      end
      x = x >> 1;
    end
    if (x != 0) d[143] = 1'b1;
    return d;
  endfunction

  function automatic logic [143:0] bin_digits(big_t v, int n);
    logic [143:0] d = '0;
    for (int j = 0; j < 72; j++)
      if (v[j]) begin
        if (j < n) d[j] = 1'b1; else d[143] = 1'b1;
      end
    return d;
  endfunction

  function automatic int ndig(logic [143:0] d);
    int k = 0;
    if (d[143]) return 1000;
    for (int j = 0; j < 143; j++) k += int'(d[j]);
    return k;
  endfunction

  function automatic logic [143:0] neg_digits(logic [143:0] d);
    return {d[143], d[70:0], d[143], d[142:72]};   // swap pos and neg masks
  endfunction

  function automatic rtab_t rev_table(int q);
    rtab_t tab = '0;
    big_t M = mod_m23(q);
    int n = 2*q+1;
    for (int g = 0; g < 3; g++) begin
      big_t w = rev_coef(q, g);
      int base = (g == 0) ? 0 : (g == 1) ? q+1 : 2*(q+1);
      int cnt  = (g == 2) ? 2*q+1 : q+1;
      for (int i = 0; i < cnt; i++) begin
        big_t e = (M - w) % M;
        logic [143:0] best = bin_digits(w, n);
        logic [143:0] cand;
        cand = naf_digits(w, n);             if (ndig(cand) < ndig(best)) best = cand;
        cand = neg_digits(bin_digits(e, n)); if (ndig(cand) < ndig(best)) best = cand;
        cand = neg_digits(naf_digits(e, n)); if (ndig(cand) < ndig(best)) best = cand;
        best[143] = 1'b0;
        best[71]  = 1'b0;
        tab[(base+i)*144 +: 144] = best;
        w = addmod(w, w, M);
      end
    end
    return tab;
  endfunction

  // Column heights of the reverse bit matrix, constant row included.
  function automatic hvec_t rev_hvec(int q);
    rtab_t tab = rev_table(q);
    hvec_t h = '0;
    for (int c = 0; c < 2*q+1; c++) begin
      int n = 1;
      for (int s = 0; s < rev_nsrc(q); s++)
        n += int'(tab[s*144 + c]) + int'(tab[s*144 + 72 + c]);
      h[c*8 +: 8] = 8'(n);
    end
    return h;
  endfunction

  // Source of the k-th bit of column c: s*2+inv, or -1 for the constant row
  // (always the last bit of a column).
  function automatic int rev_src(rtab_t tab, int q, int c, int k);
    int n = 0;
    for (int s = 0; s < rev_nsrc(q); s++) begin
      if (tab[s*144 + c]) begin
        if (n == k) return s*2;
        n++;
      end
      if (tab[s*144 + 72 + c]) begin
        if (n == k) return s*2 + 1;
        n++;
      end
    end
    return -1;
  endfunction

  // ------------------------------------------------------------------
  // Reduction-tree planning.
  // Level by level, every column is brought down to the next height of the
  // sequence 2,3,4,6,9,13,19,... with as few full adders (3:2) and half
  // adders (2:2) as that takes, counting the carries that come from the
  // column below. A carry out of the top column (weight 2^N) re-enters in
  // the next level at column 0 and at column P. The last level is the first
  // one after which every column holds at most two bits and the top column
  // sends out at most one carry; that carry is not re-entered but handed
  // to the final modular adder.
  // Returns, per column, fa in bits [c*16 +: 8] and ha in [c*16+8 +: 8].
  // ------------------------------------------------------------------
  function automatic logic [MAXC*16-1:0] tree_step(hvec_t h, int N, int P, int d, int r);
    logic [MAXC*16-1:0] res = '0;
    int cin = 0;
    for (int c = 0; c < N; c++) begin
      int hc  = int'(h[c*8 +: 8]);
      int tot = hc + cin + ((c == 0 || c == P) ? r : 0);
      int ex  = (tot > d) ? tot - d : 0;
      int f   = (ex/2 < hc/3) ? ex/2 : hc/3;
      int a   = 0;
      int rem = ex - 2*f;
      if (rem > 0 && hc - 3*f >= 3) begin f++; rem = 0; end
      if (rem > 0 && hc - 3*f >= 2) begin a = 1; rem--; end
      res[c*16 +: 8]   = 8'(f);
      res[c*16+8 +: 8] = 8'(a);
      cin = f + a;
    end
    return res;
  endfunction

  // The whole plan of a tree, computed once: for level L and column c the
  // input height, full adders and half adders (8 bits each) at
  // [(L*MAXC+c)*24 +: 24]; then, after all levels, the number of levels,
  // the carries handed to the final adder, the carries re-entered and the
  // tallest column (16 bits each).
  localparam int PLANW = MAXL*MAXC*24 + 64;
  typedef logic [PLANW-1:0] plan_t;

  function automatic plan_t tree_plan(hvec_t h0, int N, int P);
    plan_t pl = '0;
    hvec_t h = h0;
    hvec_t nh;
    logic [MAXC*16-1:0] st;
    int R = 0;
    int hmax = 0;
    for (int lev = 0; lev < MAXL; lev++) begin
      int t, mx, d, r;
      bit fin;
      mx = 0;
      for (int i = 0; i < N; i++) if (int'(h[i*8 +: 8]) > mx) mx = int'(h[i*8 +: 8]);
      if (mx > hmax) hmax = mx;
      // can this be the last level?
      st = tree_step(h, N, P, 2, 0);
      nh = '0;
      for (int i = 0; i < N; i++) begin
        int v = int'(h[i*8 +: 8]) - 2*int'(st[i*16 +: 8]) - int'(st[i*16+8 +: 8]);
        if (i > 0) v += int'(st[(i-1)*16 +: 8]) + int'(st[(i-1)*16+8 +: 8]);
        nh[i*8 +: 8] = 8'(v);
      end
      t = int'(st[(N-1)*16 +: 8]) + int'(st[(N-1)*16+8 +: 8]);
      fin = (t <= 1);
      for (int i = 0; i < N; i++) if (int'(nh[i*8 +: 8]) > 2) fin = 1'b0;
      if (!fin) begin
        d = 2;
        if (mx > 3)  d = 3;
        if (mx > 4)  d = 4;
        if (mx > 6)  d = 6;
        if (mx > 9)  d = 9;
        if (mx > 13) d = 13;
        if (mx > 19) d = 19;
        if (mx > 28) d = 28;
        if (mx > 42) d = 42;
        if (mx > 63) d = 63;
        r = 0;
        for (int it = 0; it < 12; it++) begin
          st = tree_step(h, N, P, d, r);
          t = int'(st[(N-1)*16 +: 8]) + int'(st[(N-1)*16+8 +: 8]);
          if (t == r) break;
          r = t;
        end
        nh = '0;
        for (int i = 0; i < N; i++) begin
          int v = int'(h[i*8 +: 8]) - 2*int'(st[i*16 +: 8]) - int'(st[i*16+8 +: 8]);
          if (i > 0) v += int'(st[(i-1)*16 +: 8]) + int'(st[(i-1)*16+8 +: 8]);
          if (i == 0 || i == P) v += t;
          nh[i*8 +: 8] = 8'(v);
        end
      end
      for (int i = 0; i < N; i++) begin
        pl[(lev*MAXC+i)*24 +: 8]      = h[i*8 +: 8];
        pl[(lev*MAXC+i)*24 + 8 +: 8]  = st[i*16 +: 8];
        pl[(lev*MAXC+i)*24 + 16 +: 8] = st[i*16+8 +: 8];
      end
      if (fin) begin
        pl[MAXL*MAXC*24 +: 16]      = 16'(lev + 1);
        pl[MAXL*MAXC*24 + 16 +: 16] = 16'(t);
        pl[MAXL*MAXC*24 + 32 +: 16] = 16'(R);
        pl[MAXL*MAXC*24 + 48 +: 16] = 16'(hmax);
        return pl;
      end
      R += t;
      h = nh;
    end
    return pl;   // no plan within MAXL levels: LEVELS reads 0
  endfunction

  function automatic int plan_h(plan_t pl, int L, int c);
    return int'(pl[(L*MAXC+c)*24 +: 8]);
  endfunction
  function automatic int plan_fa(plan_t pl, int L, int c);
    return int'(pl[(L*MAXC+c)*24 + 8 +: 8]);
  endfunction
  function automatic int plan_ha(plan_t pl, int L, int c);
    return int'(pl[(L*MAXC+c)*24 + 16 +: 8]);
  endfunction
  function automatic int plan_levels(plan_t pl);
    return int'(pl[MAXL*MAXC*24 +: 16]);
  endfunction
  function automatic int plan_hi(plan_t pl);
    return int'(pl[MAXL*MAXC*24 + 16 +: 16]);
  endfunction
  function automatic int plan_reentries(plan_t pl);
    return int'(pl[MAXL*MAXC*24 + 32 +: 16]);
  endfunction
  function automatic int plan_hmax(plan_t pl);
    return int'(pl[MAXL*MAXC*24 + 48 +: 16]);
  endfunction

  // Constant row of the reverse bit matrix: the constants of all inverted
  // source-bit copies (-2^j for each), less 2^(2q-2) for every re-entered carry (a carry c of
  // weight 2^(2q+1) is worth c - 2^(2q-2) c = c + 2^(2q-2) ~c - 2^(2q-2)).
  // Returned as the value modulo M; bit 2q+1 set means the value does not
  // fit 2q+1 columns and its excess 2^(2q+1) goes to the final adder.
  function automatic big_t rev_const(int q, int reentries);
    rtab_t tab = rev_table(q);
    big_t M = mod_m23(q);
    big_t k = 0;
    big_t p = big_t'(1) << (2*q-2);
    for (int s = 0; s < rev_nsrc(q); s++) begin
      big_t neg = tab[s*144+72 +: 72];
      k = addmod(k, (M - (neg % M)) % M, M);
    end
    for (int i = 0; i < reentries; i++) k = addmod(k, M - p, M);
    return k;
  endfunction

  // ------------------------------------------------------------------
  // Forward-converter look-up tables: |2^(pw*(q+1)) * z + add|_m
  // ------------------------------------------------------------------
  function automatic big_t fwd_lut_val(int q, bit plus, int pw, big_t add, big_t z);
    big_t m = mod_mi(q, plus);
    return addmod(shlmod(z, pw*(q+1), m), add % m, m);
  endfunction

  function automatic hvec_t const_hvec(int n, int h);
    hvec_t v = '0;
    for (int c = 0; c < n; c++) v[c*8 +: 8] = 8'(h);
    return v;
  endfunction

endpackage
