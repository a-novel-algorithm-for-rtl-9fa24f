// Reference model used by the testbenches: a plain dynamic-programming
// Levenshtein distance and a sequential version of the online search
// algorithm (priority rules, validation counters, Eq. 3 test), written
// without reference to the RTL. The pattern and the text are package
// variables; text positions past the end read as the padding symbol 6.
//
// The rules follow the paper's algorithm as this design reads it (see the
// README for the points where its sentences disagree); the queue-based
// interface is the testbenches' own.
package oasm_ref_pkg;
  int pat  [$];
  int text [$];

  // expected occurrences, in emission order, and the text position whose
  // end triggered their validation
  int exp_i [$];
  int exp_l [$];
  int exp_k [$];
  int exp_at [$];
  // how often each mechanism of the algorithm was exercised
  int n_r1, n_r23, n_shadow, n_eq3_kept, n_eq3_dropped;

  function automatic int tsym(int pos);
    return (pos < text.size()) ? text[pos] : 6;
  endfunction

  function automatic int lev(int i, int m);
    int prev [64];
    int cur  [64];
    for (int c = 0; c <= m; c++) prev[c] = c;
    for (int n = 1; n <= pat.size(); n++) begin
      cur[0] = n;
      for (int c = 1; c <= m; c++) begin
        int d, best;
        d = (pat[n-1] != tsym(i + c - 1)) ? 1 : 0;
        best = prev[c] + 1;
        if (cur[c-1] + 1 < best) best = cur[c-1] + 1;
        if (prev[c-1] + d < best) best = prev[c-1] + d;
        cur[c] = best;
      end
      prev = cur;
    end
    return prev[m];
  endfunction

  function automatic void oasm(int kv, int npos, int kmax);
    int mi [16], ml [16], mr [16];
    bit mv [16];
    int idx, ins, acc, lpv, m0;
    lpv = pat.size();
    m0 = (lpv - kv > 1) ? lpv - kv : 1;
    exp_i.delete(); exp_l.delete(); exp_k.delete(); exp_at.delete();
    n_r1 = 0; n_r23 = 0; n_shadow = 0; n_eq3_kept = 0; n_eq3_dropped = 0;
    idx = kmax; ins = 0;
    for (int k = 0; k <= kmax; k++) mv[k] = 0;
    for (int i = 0; i < npos; i++) begin
      for (int l = m0; l <= lpv + kv; l++) begin
        int k;
        k = lev(i, l);
        if (k > kv) continue;
        if (!ins || k < idx) begin
          idx = k; ins = 1; mi[k] = i; ml[k] = l; mr[k] = 1; mv[k] = 1; n_r1++;
        end else if (k == idx && i + l <= mi[k] + ml[k]) begin
          mi[k] = i; ml[k] = l; mr[k] = 1; n_r23++;
        end else n_shadow++;
      end
      if (ins && mr[idx] == ml[idx]) begin
        acc = 0;
        for (int j = idx; j <= kv; j++) begin
          if (!mv[j]) continue;
          if (j == idx || mr[j] - acc > ml[j]) begin
            exp_i.push_back(mi[j]); exp_l.push_back(ml[j]); exp_k.push_back(j); exp_at.push_back(i);
            acc += ml[j];
            if (j != idx) n_eq3_kept++;
          end else n_eq3_dropped++;
        end
        for (int k = 0; k <= kmax; k++) mv[k] = 0;
        idx = kmax; ins = 0;
      end else begin
        for (int j = idx; j <= kmax; j++) if (mv[j]) mr[j]++;
      end
    end
  endfunction
endpackage
