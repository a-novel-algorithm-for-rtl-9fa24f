// Self-checking testbench of lev_search (SEARCH ELEMENTs, ENA GEN, MUX).
//
// Samples [i, l, k] are generated here from a plain dynamic-programming
// Levenshtein distance and presented with the timing LEV CALC gives them:
// for each text position, 2*lp+kth-1 clocks of which the last 2*kth+1 carry
// one sample each. Expected occurrences come from a sequential model of the
// search algorithm written in this file. Test 1 is the worked example of
// the algorithm (pattern ACBDA, text CCCCDACCBDACBDAA, K = 2): the contents
// of every row (i, l, r) are compared with the published table at the end
// of every text position, and the two occurrences t[10;5] (k = 0) and
// t[3;3] (k = 2) must come out, in that order, two clocks after the last
// sample of position 14. The other tests use random texts with planted,
// slightly corrupted copies of random patterns.
//
// Test 1 is the paper's worked example; the random tests are this
// testbench's own.
module tb_lev_search;
  localparam int K_MAX = 5, IDX_W = 16, LEN_W = 5, R_W = 16;
  localparam int MAXT = 400;

  logic clk = 0, rst_n = 0;
  logic [2:0] kth;
  logic samp_valid = 0, samp_last = 0;
  logic [LEN_W-1:0] lev_dist, target_len;
  logic [IDX_W-1:0] samp_index;
  logic [IDX_W+3+LEN_W-1:0] result;
  logic valid, busy, hold;

  lev_search dut (.*);

  // hold must cover the eos clock and every validation clock but the last
  // (the samples played here are spaced so that they never need it)
  logic eos_d;
  always @(posedge clk) eos_d <= rst_n && samp_valid && samp_last;
  always @(posedge clk) if (rst_n && (eos_d || (dut.u_ena_gen.validating && !dut.u_ena_gen.last_row)))
    chk(hold, "hold low during eos or validation");

  int checks = 0, failures = 0;
  int text [MAXT];
  int pat [16];
  int tlen, lpv, kv;
  longint cyc = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endfunction

  function automatic int tsym(int pos);
    return (pos < tlen) ? text[pos] : 6;
  endfunction

  function automatic int ref_lev(int i, int m);
    int prev [32];
    int cur  [32];
    for (int c = 0; c <= m; c++) prev[c] = c;
    for (int n = 1; n <= lpv; n++) begin
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

  // sequential model of the search algorithm
  int exp_i [$], exp_l [$], exp_k [$], exp_at [$];
  task automatic ref_oasm(int npos);
    int mi [6], ml [6], mr [6];
    bit mv [6];
    int idx, ins, acc;
    idx = K_MAX; ins = 0;
    for (int k = 0; k <= K_MAX; k++) mv[k] = 0;
    for (int i = 0; i < npos; i++) begin
      int m0;
      m0 = (lpv - kv > 1) ? lpv - kv : 1;
      for (int l = m0; l <= lpv + kv; l++) begin
        int k;
        k = ref_lev(i, l);
        if (k > kv) continue;
        if (!ins || k < idx) begin
          idx = k; ins = 1; mi[k] = i; ml[k] = l; mr[k] = 1; mv[k] = 1;
        end else if (k == idx && i + l <= mi[k] + ml[k]) begin
          mi[k] = i; ml[k] = l; mr[k] = 1;
        end
      end
      if (ins && mr[idx] == ml[idx]) begin
        acc = 0;
        for (int j = idx; j <= kv; j++) begin
          if (!mv[j]) continue;
          if (j == idx || mr[j] - acc > ml[j]) begin
            exp_i.push_back(mi[j]); exp_l.push_back(ml[j]); exp_k.push_back(j); exp_at.push_back(i);
            acc += ml[j];
          end
        end
        for (int k = 0; k <= K_MAX; k++) mv[k] = 0;
        idx = K_MAX; ins = 0;
      end else begin
        for (int j = idx; j <= K_MAX; j++) if (mv[j]) mr[j]++;
      end
    end
  endtask

  // result monitor
  int got_i [$], got_l [$], got_k [$];
  longint got_cyc [$];
  always @(posedge clk) if (rst_n && valid) begin
    got_i.push_back(int'(result[IDX_W+3+LEN_W-1 -: IDX_W]));
    got_k.push_back(int'(result[LEN_W +: 3]));
    got_l.push_back(int'(result[LEN_W-1:0]));
    got_cyc.push_back(cyc);
  end

  longint last_samp_cyc [MAXT];
  bit check_table;
  // published table of the worked example: (i, l, r) per k, -1 = empty
  int tab [16][3][3];

  task automatic play(int npos);
    int m0;
    m0 = (lpv - kv > 1) ? lpv - kv : 1;
    for (int i = 0; i < npos; i++) begin
      repeat (2*lpv + kv - 1 - (lpv + kv - m0 + 1)) @(negedge clk);
      for (int l = m0; l <= lpv + kv; l++) begin
        @(negedge clk);
        samp_valid = 1; samp_index = IDX_W'(i); target_len = LEN_W'(l);
        lev_dist = LEN_W'(ref_lev(i, l) > 31 ? 31 : ref_lev(i, l));
        samp_last = (l == lpv + kv);
        if (samp_last) last_samp_cyc[i] = cyc;
      end
      @(negedge clk); samp_valid = 0; samp_last = 0;
      if (check_table && i < 16) begin
        // end-of-position cycle: rows hold the state after this position's hits
        for (int k = 0; k < 3; k++) begin
          if (tab[i][k][0] < 0) chk(!dut.o_vld[k], $sformatf("row %0d k=%0d should be empty", i, k));
          else chk(dut.o_vld[k] && int'(dut.o_index[k]) == tab[i][k][0] && int'(dut.o_len[k]) == tab[i][k][1]
                   && int'(dut.o_r[k]) == tab[i][k][2],
                   $sformatf("row %0d k=%0d: got %0d,%0d,%0d exp %0d,%0d,%0d", i, k, dut.o_index[k], dut.o_len[k], dut.o_r[k],
                             tab[i][k][0], tab[i][k][1], tab[i][k][2]));
        end
      end
    end
    repeat (12) @(negedge clk);
  endtask

  task automatic compare(string name);
    chk(got_i.size() == exp_i.size(), $sformatf("%s: %0d results, expected %0d", name, got_i.size(), exp_i.size()));
    for (int q = 0; q < exp_i.size() && q < got_i.size(); q++) begin
      chk(got_i[q] == exp_i[q] && got_l[q] == exp_l[q] && got_k[q] == exp_k[q],
          $sformatf("%s result %0d: got (%0d,%0d,k%0d) exp (%0d,%0d,k%0d)", name, q, got_i[q], got_l[q], got_k[q], exp_i[q], exp_l[q], exp_k[q]));
      // the first row of a validation leaves two clocks after the last sample
      if (q == 0 || exp_at[q] != exp_at[q-1])
        chk(got_cyc[q] == last_samp_cyc[exp_at[q]] + 2, $sformatf("%s result %0d latency %0d", name, q, got_cyc[q] - last_samp_cyc[exp_at[q]]));
    end
    got_i.delete(); got_l.delete(); got_k.delete(); got_cyc.delete();
    exp_i.delete(); exp_l.delete(); exp_k.delete(); exp_at.delete();
  endtask

  task automatic set_row(int i, int k, int a, int b, int c);
    tab[i][k][0] = a; tab[i][k][1] = b; tab[i][k][2] = c;
  endtask

  initial begin
    string ps, ts;
    lev_dist = '0; target_len = '0; samp_index = '0; kth = 3'd2;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // ---- test 1: worked example, A..D = 0..3
    ps = "ACBDA"; ts = "CCCCDACCBDACBDAA";
    lpv = 5; kv = 2; tlen = 16; kth = 3'd2;
    for (int q = 0; q < 5; q++) pat[q] = ps[q] - "A";
    for (int q = 0; q < 16; q++) text[q] = ts[q] - "A";
    for (int i = 0; i < 16; i++) for (int k = 0; k < 3; k++) set_row(i, k, -1, 0, 0);
    set_row(1, 2, 1, 5, 1); set_row(2, 2, 2, 4, 1);
    for (int i = 3; i <= 14; i++) set_row(i, 2, 3, 3, i - 2);
    set_row(5, 1, 5, 6, 1); set_row(6, 1, 6, 5, 1);
    for (int i = 7; i <= 14; i++) set_row(i, 1, 7, 4, i - 6);
    for (int i = 10; i <= 14; i++) set_row(i, 0, 10, 5, i - 9);
    ref_oasm(16);
    chk(exp_i.size() == 2 && exp_i[0] == 10 && exp_l[0] == 5 && exp_i[1] == 3 && exp_l[1] == 3, "reference model reproduces the worked example");
    check_table = 1;
    play(16);
    check_table = 0;
    compare("example");
    // ---- random tests
    for (int t = 0; t < 12; t++) begin
      lpv = $urandom_range(5, 12);
      kv  = $urandom_range(1, 3);
      tlen = $urandom_range(120, 300);
      kth = 3'(kv);
      for (int q = 0; q < lpv; q++) pat[q] = $urandom_range(0, 3);
      for (int q = 0; q < tlen; q++) text[q] = $urandom_range(0, 3);
      for (int c = 0; c < 8; c++) begin
        int at;
        at = $urandom_range(0, tlen - lpv - 1);
        for (int q = 0; q < lpv; q++) text[at + q] = pat[q];
        for (int e = 0; e < $urandom_range(0, kv); e++) text[at + $urandom_range(0, lpv - 1)] = $urandom_range(0, 3);
      end
      rst_n = 0; @(negedge clk); rst_n = 1;
      ref_oasm(tlen + lpv + kv);
      play(tlen + lpv + kv);
      compare($sformatf("random %0d (lp=%0d K=%0d)", t, lpv, kv));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
