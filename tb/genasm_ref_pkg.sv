// genasm_ref_pkg: software reference model of GenASM used by the testbenches.
//
// Plain behavioural code, written from the algorithm text, not from the RTL:
//   ref_window  Bitap over one window (text scanned last base first), keeps
//               the match/insertion/deletion vectors of every text index and
//               distance and returns the smallest distance with a 0 at the
//               sub-pattern MSB after text index 0 (-1 if none);
//   ref_trace   traceback over those vectors with the extend-first priority;
//   ref_align   the whole window walk of the divide-and-conquer traceback,
//               returning the CIGAR ops and the total number of errors;
//   ref_semiglobal  plain dynamic-programming edit distance of the whole
//               query against a prefix of the text (free text end), a lower
//               bound for ref_align's error count.
// Sequences are int queues of 2-bit codes. Vectors are 64 bits wide; only the
// low W bits are meaningful.
package genasm_ref_pkg;

  typedef logic [63:0] vec_t;
  typedef int seq_t[$];

  // per window: [text index][distance]
  vec_t v_mat [64][64];
  vec_t v_ins [64][64];
  vec_t v_del [64][64];

  function automatic vec_t wmask(int w);
    return (w >= 64) ? '1 : ((64'd1 << w) - 1);
  endfunction

  function automatic int ref_window(seq_t txt, int t0, int lt, seq_t pat, int p0, int lp,
                                    int w, int nd);
    vec_t pm [4];
    vec_t r [64];
    vec_t old [64];
    int best;
    for (int c = 0; c < 4; c++) begin
      pm[c] = '1;
      for (int b = 0; b < lp; b++) pm[c][b] = (pat[p0 + lp - 1 - b] != c);
      pm[c] &= wmask(w);
    end
    for (int d = 0; d < nd; d++) r[d] = wmask(w);
    for (int i = lt - 1; i >= 0; i--) begin
      vec_t cur;
      cur = pm[txt[t0 + i]];
      for (int d = 0; d < nd; d++) old[d] = r[d];
      r[0] = ((old[0] << 1) | cur) & wmask(w);
      v_mat[i][0] = r[0];
      v_ins[i][0] = wmask(w);
      v_del[i][0] = wmask(w);
      for (int d = 1; d < nd; d++) begin
        vec_t dv, sv, iv, mv;
        dv = old[d-1];
        sv = (old[d-1] << 1) & wmask(w);
        iv = (r[d-1] << 1) & wmask(w);
        mv = ((old[d] << 1) | cur) & wmask(w);
        r[d] = dv & sv & iv & mv;
        v_mat[i][d] = mv;
        v_ins[i][d] = iv;
        v_del[i][d] = dv;
      end
    end
    best = -1;
    for (int d = nd - 1; d >= 0; d--) if (r[d][lp-1] == 1'b0) best = d;
    return best;
  endfunction

  // ops: 0=M 1=S 2=I 3=D
  function automatic int ref_trace(int err0, int lp, int lt, bit last, int w, int o,
                                   bit subs_last, ref int ops[$], output int tc,
                                   output int pc, output int errs);
    int ce, ti, pi, prev;
    ce = err0; ti = 0; pi = lp - 1; prev = -1;
    tc = 0; pc = 0; errs = 0;
    forever begin
      bit m0, s0, i0, d0;
      int op;
      m0 = 0; s0 = 0; i0 = 0; d0 = 0;
      if (ti < lt) begin
        m0 = (v_mat[ti][ce][pi] == 0);
        if (ce > 0) begin
          d0 = (v_del[ti][ce][pi] == 0);
          s0 = (pi > 0) ? (v_del[ti][ce][pi-1] == 0) : 1'b1;
          i0 = (v_ins[ti][ce][pi] == 0);
        end
      end
      if (prev == 2 && i0) op = 2;
      else if (prev == 3 && d0) op = 3;
      else if (m0) op = 0;
      else if (!subs_last && s0) op = 1;
      else if (i0) op = 2;
      else if (d0) op = 3;
      else if (subs_last && s0) op = 1;
      else return 0;
      ops.push_back(op);
      prev = op;
      if (op != 0) begin ce--; errs++; end
      if (op != 2) begin ti++; tc++; end
      if (op != 3) begin pi--; pc++; end
      if (pc == lp) return 1;
      if (!last && (tc == w - o || pc == w - o)) return 1;
    end
  endfunction

  function automatic int ref_align(seq_t txt, seq_t pat, int w, int o, int nd, bit subs_last,
                                   ref int ops[$], output int total, output int nwin);
    int ct, cp, m, n;
    n = txt.size(); m = pat.size();
    ct = 0; cp = 0; total = 0; nwin = 0;
    while (cp < m && ct < n) begin
      int lt, lp, d, tc, pc, e;
      bit last;
      lt = (n - ct >= w) ? w : n - ct;
      lp = (m - cp >= w) ? w : m - cp;
      last = (m - cp <= w);
      d = ref_window(txt, ct, lt, pat, cp, lp, w, nd);
      if (d < 0) return 0;
      if (!ref_trace(d, lp, lt, last, w, o, subs_last, ops, tc, pc, e)) return 0;
      total += e; ct += tc; cp += pc; nwin++;
    end
    return 1;
  endfunction

  function automatic int ref_semiglobal(seq_t txt, seq_t pat);
    int prev[$], cur[$];
    int n, m, best;
    n = txt.size(); m = pat.size();
    for (int j = 0; j <= n; j++) prev.push_back(j);      // text prefix before query start not free
    for (int i = 1; i <= m; i++) begin
      cur = {};
      cur.push_back(i);
      for (int j = 1; j <= n; j++) begin
        int v;
        v = prev[j-1] + ((pat[i-1] == txt[j-1]) ? 0 : 1);
        if (prev[j] + 1 < v) v = prev[j] + 1;
        if (cur[j-1] + 1 < v) v = cur[j-1] + 1;
        cur.push_back(v);
      end
      prev = cur;
    end
    best = prev[0];
    for (int j = 0; j <= n; j++) if (prev[j] < best) best = prev[j];
    return best;
  endfunction

endpackage
