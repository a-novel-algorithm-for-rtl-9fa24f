// Self-checking testbench of lev_core at its default size (LP_MAX = 15,
// K_MAX = 5, 3-bit symbols).
//
// The testbench plays the text window itself: it presents t[i ..] with the
// index i, sometimes withholds it (sub_valid low) and advances when the
// core acknowledges. For each (lp, kth) setting the emitted occurrences are
// compared, in order, with the sequential reference model. Timing checks:
// with the window always available and a setting where the sub-blocks can
// overlap, consecutive positions start exactly 2*lp + kth - 1 clocks apart
// and no stall clock is counted; for settings with kth large against lp
// (lp = 4, kth = 3 and lp = kth = 5) stall clocks must appear.
//
// The clocks per position checked are the paper's (Eq. 7); the settings
// and texts are this testbench's own.
module tb_lev_core;
  import oasm_ref_pkg::*;
  localparam int LP_MAX = 15, K_MAX = 5, SYMB_W = 3, W = LP_MAX + K_MAX;
  logic clk = 0, rst_n = 0, run = 0, sub_valid = 0;
  logic [LP_MAX*SYMB_W-1:0] pattern = '0;
  logic [3:0] lp = 4'd5;
  logic [2:0] kth = 3'd2;
  logic [W*SYMB_W-1:0] substring = '0;
  logic [15:0] index_stream = '0;
  logic sub_ack, valid, idle;
  logic [23:0] result;
  logic [31:0] stall_cycles;

  lev_core dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  initial begin : watchdog
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  function automatic void chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endfunction

  int got_i [$], got_l [$], got_k [$];
  always @(posedge clk) if (rst_n && valid) begin
    got_i.push_back(int'(result[23:8]));
    got_k.push_back(int'(result[7:5]));
    got_l.push_back(int'(result[4:0]));
  end

  task automatic run_cfg(int lpv, int kv, int tlen, bit gaps, bit expect_stall);
    int npos, i;
    longint last_ack;
    bit period_ok;
    pat.delete(); text.delete();
    for (int q = 0; q < lpv; q++) pat.push_back($urandom_range(0, 3));
    for (int q = 0; q < tlen; q++) text.push_back($urandom_range(0, 3));
    for (int c = 0; c < tlen / 25; c++) begin
      int at;
      at = $urandom_range(0, tlen - lpv - 1);
      for (int q = 0; q < lpv; q++) text[at + q] = pat[q];
      for (int e = 0; e < $urandom_range(0, kv); e++) text[at + $urandom_range(0, lpv - 1)] = $urandom_range(0, 3);
    end
    npos = tlen + lpv + kv;
    oasm(kv, npos, K_MAX);
    for (int q = 0; q < LP_MAX; q++) pattern[q*SYMB_W +: SYMB_W] = (q < lpv) ? 3'(pat[q]) : 3'd0;
    lp = 4'(lpv); kth = 3'(kv);
    @(negedge clk); rst_n = 0;
    @(negedge clk); rst_n = 1; run = 1;
    i = 0; last_ack = -1; period_ok = 1;
    got_i.delete(); got_l.delete(); got_k.delete();
    while (i < npos) begin
      @(negedge clk);
      for (int q = 0; q < W; q++) substring[q*SYMB_W +: SYMB_W] = 3'(tsym(i + q));
      index_stream = 16'(i);
      sub_valid = !gaps || ($urandom_range(0, 3) != 0);
      #1;
      if (sub_ack) begin
        if (last_ack >= 0 && cyc - last_ack != longint'(2*lpv + kv - 1)) period_ok = 0;
        last_ack = cyc;
        i++;
      end
    end
    @(negedge clk); sub_valid = 0;
    wait (idle);
    repeat (4) @(negedge clk);
    run = 0;
    chk(got_i.size() == exp_i.size(), $sformatf("lp=%0d K=%0d: %0d results, expected %0d", lpv, kv, got_i.size(), exp_i.size()));
    for (int q = 0; q < exp_i.size() && q < got_i.size(); q++)
      chk(got_i[q] == exp_i[q] && got_l[q] == exp_l[q] && got_k[q] == exp_k[q],
          $sformatf("lp=%0d K=%0d result %0d: got (%0d,%0d,k%0d) exp (%0d,%0d,k%0d)", lpv, kv, q,
                    got_i[q], got_l[q], got_k[q], exp_i[q], exp_l[q], exp_k[q]));
    if (!gaps && !expect_stall) chk(period_ok && stall_cycles == 0, $sformatf("lp=%0d K=%0d: positions not %0d clocks apart", lpv, kv, 2*lpv + kv - 1));
    if (expect_stall) chk(stall_cycles > 0, $sformatf("lp=%0d K=%0d: no stall", lpv, kv));
    $display("lp=%0d K=%0d: %0d occurrences, %0d stall clocks", lpv, kv, got_i.size(), stall_cycles);
  endtask

  initial begin
    repeat (2) @(negedge clk);
    run_cfg(15, 5, 300, 0, 0);
    run_cfg(5, 3, 300, 0, 0);
    run_cfg(7, 2, 300, 1, 0);
    run_cfg(10, 3, 300, 0, 0);
    run_cfg(4, 3, 200, 0, 1);
    run_cfg(5, 5, 200, 0, 1);
    run_cfg(8, 1, 300, 1, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
