// Self-checking testbench of lev_calc.
//
// For several (lp, kth) settings it plays a random text over a 4-letter
// alphabet through the array, one text position after another as fast as
// the array accepts them, and compares every sample with a plain dynamic
// programming evaluation of lev(p, t[i, m]) (text positions past the end
// read as the padding symbol). It also checks that each position yields
// exactly the lengths max(1, lp-kth) .. lp+kth, that the first and last
// sample of a position appears max(1, lp-kth) + lp clocks after its start
// and the last one 2*lp+kth clocks after it, and that consecutive positions
// start 2*lp+kth-1 clocks apart. A last run drives hold at random: the
// distances must be unchanged, no sample may leave in a clock after hold,
// and frozen must have been seen.
//
// The step counts checked are the paper's (Eq. 6); the random texts and
// the hold pattern are this testbench's own.
module tb_lev_calc;
  localparam int LP_MAX = 15, K_MAX = 5, SYMB_W = 3, IDX_W = 16;
  localparam int W = LP_MAX + K_MAX;
  localparam int TLEN = 48;
  localparam logic [SYMB_W-1:0] D2 = 3'd6;

  logic clk = 0, rst_n = 0, start = 0, hold = 0;
  logic [LP_MAX*SYMB_W-1:0] pattern;
  logic [3:0] lp;
  logic [2:0] kth;
  logic [W*SYMB_W-1:0] substring;
  logic [IDX_W-1:0] index_in;
  logic busy, ready, samp_valid, samp_last, frozen;
  logic [4:0] lev_dist, target_len;
  logic [IDX_W-1:0] samp_index;

  int checks = 0, failures = 0;
  int text [TLEN];
  int pat  [LP_MAX];
  longint cyc = 0;
  longint start_cyc [TLEN];
  int nsamp [TLEN];

  lev_calc dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int tsym(int pos);
    return (pos < TLEN) ? text[pos] : int'(D2);
  endfunction

  function automatic int ref_lev(int lpv, int i, int m);
    int prev [W+1];
    int cur  [W+1];
    for (int c = 0; c <= m; c++) prev[c] = c;
    for (int n = 1; n <= lpv; n++) begin
      cur[0] = n;
      for (int c = 1; c <= m; c++) begin
        int best;
        best = prev[c] + 1;
        if (cur[c-1] + 1 < best) best = cur[c-1] + 1;
        if (prev[c-1] + ((pat[n-1] != tsym(i + c - 1)) ? 1 : 0) < best)
          best = prev[c-1] + ((pat[n-1] != tsym(i + c - 1)) ? 1 : 0);
        cur[c] = best;
      end
      prev = cur;
    end
    return prev[m];
  endfunction

  function automatic void chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endfunction

  int cur_lp, cur_k;
  bit rand_hold = 0, hold_d = 0;
  int n_frozen = 0;
  always @(negedge clk) hold = rand_hold && ($urandom_range(0, 2) == 0);
  always @(posedge clk) begin
    if (rst_n && hold_d) chk(!samp_valid, "sample delivered after hold");
    hold_d <= hold && busy;
    if (frozen) n_frozen++;
  end
  // sample monitor
  always @(posedge clk) if (rst_n && samp_valid) begin
    automatic int i = int'(samp_index), m = int'(target_len);
    automatic int e = ref_lev(cur_lp, i, m);
    automatic int m0 = (cur_lp - cur_k > 1) ? cur_lp - cur_k : 1;
    chk(int'(lev_dist) == e, $sformatf("lp=%0d k=%0d i=%0d m=%0d dist=%0d exp=%0d", cur_lp, cur_k, i, m, lev_dist, e));
    chk(m >= m0 && m <= cur_lp + cur_k, $sformatf("length %0d out of range", m));
    if (m == m0 && !rand_hold) chk(cyc - start_cyc[i] == longint'(m0 + cur_lp - 1 + 1), $sformatf("first sample at +%0d", cyc - start_cyc[i]));
    chk(samp_last == (m == cur_lp + cur_k), "samp_last");
    if (samp_last && !rand_hold) chk(cyc - start_cyc[i] == longint'(2*cur_lp + cur_k), $sformatf("last sample at +%0d", cyc - start_cyc[i]));
    nsamp[i]++;
  end

  task automatic run_cfg(int lpv, int kv);
    int i;
    cur_lp = lpv; cur_k = kv;
    for (int q = 0; q < TLEN; q++) begin text[q] = $urandom_range(0, 3); nsamp[q] = 0; end
    for (int q = 0; q < LP_MAX; q++) pat[q] = $urandom_range(0, 3);
    // plant copies of the pattern so that small distances occur
    for (int q = 0; q < lpv && 5 + q < TLEN; q++) text[5 + q] = pat[q];
    for (int q = 0; q < lpv && 25 + q < TLEN; q++) if (q != 2) text[25 + q] = pat[q];
    for (int q = 0; q < LP_MAX; q++) pattern[q*SYMB_W +: SYMB_W] = SYMB_W'(pat[q]);
    lp = 4'(lpv); kth = 3'(kv);
    i = 0;
    while (i < TLEN) begin
      @(negedge clk);
      for (int q = 0; q < W; q++) substring[q*SYMB_W +: SYMB_W] = SYMB_W'(tsym(i + q));
      index_in = IDX_W'(i);
      start = 1;
      #1;
      if (ready) begin
        @(posedge clk);
        start_cyc[i] = cyc;
        if (i > 0 && !rand_hold) chk(start_cyc[i] - start_cyc[i-1] == longint'(2*lpv + kv - 1), "position period");
        i++;
      end
    end
    @(negedge clk); start = 0;
    repeat (4*LP_MAX + 2*K_MAX + 8) @(posedge clk);
    for (int q = 0; q < TLEN; q++) begin
      automatic int m0 = (lpv - kv > 1) ? lpv - kv : 1;
      chk(nsamp[q] == lpv + kv - m0 + 1, $sformatf("position %0d gave %0d samples", q, nsamp[q]));
    end
  endtask

  initial begin
    pattern = '0; substring = '0; index_in = '0; lp = 4'd4; kth = 3'd1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_cfg(4, 1);
    run_cfg(5, 2);
    run_cfg(15, 5);
    run_cfg(8, 3);
    run_cfg(10, 0);
    run_cfg(1, 0);
    run_cfg(15, 3);
    for (int r = 0; r < 4; r++) begin
      automatic int l = $urandom_range(2, 15);
      run_cfg(l, $urandom_range(0, (l - 1 < 5) ? l - 1 : 5));
    end
    rand_hold = 1;
    run_cfg(6, 2);
    run_cfg(3, 3);
    rand_hold = 0;
    chk(n_frozen > 0, "frozen never seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
