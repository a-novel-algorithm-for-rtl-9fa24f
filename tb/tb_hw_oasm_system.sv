// End-to-end testbench of hw_oasm_system at its default parameters
// (LP_MAX = 15, 3-bit symbols, K_MAX = 5, 16-bit index, 1 Mbit text ROM,
// 1 Mbit result RAM).
//
// It reproduces the speed experiments of the design's evaluation: a random
// text of 3104 symbols over a 4-letter alphabet (codes 0..3) is loaded into
// the text ROM through its initialisation port, then random patterns are
// searched with (lp, kth) = (5,3), (7,3), (10,3), (15,3) and (5,2), (5,4),
// (5,5). A few slightly corrupted copies of each pattern are planted in
// the text so that long patterns produce occurrences too. For each setting
// the system is started with start_elab, the results are read back with
// result_return under random out_ready back-pressure, and the list is
// compared, in order, with the sequential reference model. The elaboration
// time is checked against (2*lp + kth - 1) clocks per text position plus
// the counted stall clocks, and printed next to the time at 100 MHz.
// Counted mechanisms (each must occur): R1 insertion, R2/R3 replacement,
// shadow hit discarded, lower-priority row kept by Eq. 3, row dropped by
// Eq. 3, multi-row validation, stall of the core, RAM write, back-pressure.
//
// The text length and the (lp, kth) settings are those of the paper's speed
// tables; the random text and the planted copies are this testbench's own,
// as the paper's DNA sequence is not available.
module tb_hw_oasm_system;
  import oasm_ref_pkg::*;
  localparam int TLEN = 3104, SPW = 5;
  logic clk = 0, rst_n = 0, start_elab = 0, result_return = 0, rom_we = 0, out_ready = 0;
  logic [44:0] pattern = '0;
  logic [3:0] lp = 4'd5;
  logic [2:0] kth = 3'd3;
  logic [19:0] text_len = 20'(TLEN);
  logic [15:0] rom_waddr = '0;
  logic [14:0] rom_wdata = '0;
  logic [23:0] out_data;
  logic out_valid, busy, done, overflow, text_done;
  logic [15:0] n_results;
  logic [31:0] stall_cycles;

  hw_oasm_system dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  initial begin : watchdog
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  function automatic void chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endfunction

  // mechanism counters, probed inside the design
  int c_r1 = 0, c_r23 = 0, c_shadow = 0, c_kept = 0, c_dropped = 0, c_multi = 0, c_ramw = 0, c_bp = 0;
  int rows_this_validation = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_core.u_search.u_ena_gen.r1) c_r1++;
    if (dut.u_core.u_search.u_ena_gen.r23) c_r23++;
    if (dut.u_core.u_search.u_ena_gen.hit && !dut.u_core.u_search.u_ena_gen.r1 && !dut.u_core.u_search.u_ena_gen.r23) c_shadow++;
    if (dut.u_core.u_search.u_ena_gen.validating) begin
      automatic int jj = int'(dut.u_core.u_search.u_ena_gen.j);
      if (dut.u_core.u_search.u_ena_gen.o_vld[jj] && jj != int'(dut.u_core.u_search.u_ena_gen.idx)) begin
        if (dut.u_core.u_search.u_ena_gen.accept) c_kept++; else c_dropped++;
      end
      if (dut.u_core.u_search.u_ena_gen.accept) rows_this_validation++;
      if (dut.u_core.u_search.u_ena_gen.last_row) begin
        if (rows_this_validation > 1) c_multi++;
        rows_this_validation = 0;
      end
    end
    if (dut.ram_we) c_ramw++;
    if (out_valid && !out_ready) c_bp++;
  end

  task automatic search(int lpv, int kv);
    int npos, got;
    longint t0, t1, per, budget, s0, st;
    int gi [$], gl [$], gk [$];
    pat.delete();
    for (int q = 0; q < lpv; q++) pat.push_back($urandom_range(0, 3));
    // plant a few corrupted copies of the pattern
    for (int c = 0; c < 6; c++) begin
      int at;
      at = $urandom_range(0, TLEN - lpv - 1);
      for (int q = 0; q < lpv; q++) text[at + q] = pat[q];
      for (int e = 0; e < $urandom_range(0, kv); e++) text[at + $urandom_range(0, lpv - 1)] = $urandom_range(0, 3);
    end
    load_rom();
    npos = TLEN + lpv + kv;
    oasm(kv, npos, 5);
    for (int q = 0; q < 15; q++) pattern[q*3 +: 3] = (q < lpv) ? 3'(pat[q]) : 3'd0;
    lp = 4'(lpv); kth = 3'(kv);
    @(negedge clk); start_elab = 1;
    @(negedge clk); start_elab = 0;
    t0 = cyc;
    s0 = longint'(stall_cycles);
    wait (done);
    t1 = cyc;
    per = 2*lpv + kv - 1;
    st = longint'(stall_cycles) - s0;
    // fixed overhead: filling the 20-symbol window before the first position
    budget = per * npos + st + 100;
    chk(t1 - t0 <= budget && t1 - t0 >= per * (npos - 1),
        $sformatf("lp=%0d K=%0d: %0d clocks, expected about %0d", lpv, kv, t1 - t0, per * npos + st));
    chk(!overflow && int'(n_results) == exp_i.size(), $sformatf("lp=%0d K=%0d: %0d results stored, expected %0d", lpv, kv, n_results, exp_i.size()));
    @(negedge clk); result_return = 1;
    @(negedge clk); result_return = 0;
    got = 0;
    while (got < int'(n_results)) begin
      @(negedge clk);
      out_ready = ($urandom_range(0, 3) != 0);
      #1;
      if (out_valid && out_ready) begin
        gi.push_back(int'(out_data[23:8])); gk.push_back(int'(out_data[7:5])); gl.push_back(int'(out_data[4:0]));
        got++;
      end
    end
    @(negedge clk); out_ready = 0;
    wait (done);
    for (int q = 0; q < exp_i.size() && q < gi.size(); q++)
      chk(gi[q] == exp_i[q] && gl[q] == exp_l[q] && gk[q] == exp_k[q],
          $sformatf("lp=%0d K=%0d result %0d: got (%0d,%0d,k%0d) exp (%0d,%0d,k%0d)", lpv, kv, q, gi[q], gl[q], gk[q], exp_i[q], exp_l[q], exp_k[q]));
    $display("l_t=%0d lp=%0d K=%0d: %0d occurrences, %0d clocks (%0d stall), %.4f ms at 100 MHz; (2lp+K-1)*l_t = %0d clocks",
             TLEN, lpv, kv, n_results, t1 - t0, st, real'(t1 - t0) * 1.0e-5, per * TLEN);
  endtask

  task automatic load_rom();
    for (int w = 0; w * SPW < TLEN; w++) begin
      @(negedge clk);
      rom_we = 1; rom_waddr = 16'(w);
      for (int s = 0; s < SPW; s++) rom_wdata[s*3 +: 3] = (w*SPW + s < TLEN) ? 3'(text[w*SPW + s]) : 3'd0;
    end
    @(negedge clk); rom_we = 0;
  endtask

  initial begin
    text.delete();
    for (int q = 0; q < TLEN; q++) text.push_back($urandom_range(0, 3));
    repeat (2) @(negedge clk);
    rst_n = 1;
    // first test of the evaluation: K = 3, lp = 5, 7, 10, 15
    search(5, 3);
    search(7, 3);
    search(10, 3);
    search(15, 3);
    // second test: lp = 5, K = 2, 4, 5 (K = 3 above)
    search(5, 2);
    search(5, 4);
    search(5, 5);
    chk(c_r1 > 0,      "R1 insertion never happened");
    chk(c_r23 > 0,     "R2/R3 replacement never happened");
    chk(c_shadow > 0,  "no shadow hit was discarded");
    chk(c_kept > 0,    "Eq. 3 never kept a lower-priority row");
    chk(c_dropped > 0, "Eq. 3 never dropped a row");
    chk(c_multi > 0,   "no validation emitted more than one row");
    chk(stall_cycles > 0, "the core never stalled");  // cumulative over all settings
    chk(c_ramw > 0,    "nothing written to the RAM");
    chk(c_bp > 0,      "no back-pressure on the result port");
    $display("mechanisms: R1=%0d R2/R3=%0d shadow=%0d eq3_kept=%0d eq3_dropped=%0d multi=%0d ram_writes=%0d backpressure=%0d",
             c_r1, c_r23, c_shadow, c_kept, c_dropped, c_multi, c_ramw, c_bp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
