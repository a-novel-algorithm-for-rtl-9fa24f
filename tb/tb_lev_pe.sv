// Self-checking testbench of lev_pe.
//
// A single processing element is made to compute one whole row of the
// Levenshtein matrix C: for random pattern symbols and substrings the
// testbench builds C by plain dynamic programming, plays the row above
// (a_reg(j-1), a_reg_d(j-1)) into the element step by step, shifts the
// substring symbols in with the array's timing, and compares a_reg after
// every step with the expected c(j+1, cnt-j). Element indices 0 (top row,
// upper neighbours from the counter) and 1..6 are covered.
//
// The update rule checked is the paper's processing-element recurrence;
// the stimulus is random.
module tb_lev_pe;
  localparam int SYMB_W = 3, D_W = 6, J_W = 4;
  logic clk = 0, step = 0, shift = 0;
  logic [J_W-1:0] j;
  logic [D_W-1:0] cnt, up, up_left;
  logic [SYMB_W-1:0] p_sym, sh_in, sh_q;
  logic [D_W-1:0] a_q, a_d_q;

  lev_pe dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int pat [8];
  int s [16];
  int C [9][17];

  initial begin
    p_sym = '0; sh_in = '0; up = '0; up_left = '0; cnt = '0; j = '0;
    for (int trial = 0; trial < 300; trial++) begin
      int jj, lp, ls, nsteps;
      jj = trial % 7;
      lp = jj + 1;
      ls = $urandom_range(1, 12);
      for (int q = 0; q < lp; q++) pat[q] = $urandom_range(0, 3);
      for (int q = 0; q < ls; q++) s[q] = (trial % 5 == 0) ? pat[q % lp] : $urandom_range(0, 3);
      for (int m = 0; m <= ls; m++) C[0][m] = m;
      for (int n = 1; n <= lp; n++) begin
        C[n][0] = n;
        for (int m = 1; m <= ls; m++) begin
          int b;
          b = C[n-1][m] + 1;
          if (C[n][m-1] + 1 < b) b = C[n][m-1] + 1;
          if (C[n-1][m-1] + ((pat[n-1] != s[m-1]) ? 1 : 0) < b) b = C[n-1][m-1] + ((pat[n-1] != s[m-1]) ? 1 : 0);
          C[n][m] = b;
        end
      end
      // element jj owns row jj+1
      j = J_W'(jj);
      p_sym = SYMB_W'(pat[jj]);
      nsteps = jj + ls;
      // load cycle: first symbol for step 1 is s[0-jj]
      @(negedge clk);
      step = 0; shift = 1; sh_in = (jj == 0) ? SYMB_W'(s[0]) : 3'd6;
      for (int c = 1; c <= nsteps; c++) begin
        int m;
        @(negedge clk);
        m = c - jj;
        step = 1; shift = 1; cnt = D_W'(c);
        up      = (m >= 0 && jj > 0) ? D_W'(C[jj][m]) : '0;
        up_left = (m >= 1 && jj > 0) ? D_W'(C[jj][m-1]) : '0;
        sh_in   = (c - jj >= 0 && c - jj < ls) ? SYMB_W'(s[c - jj]) : 3'd6;
        @(posedge clk); #1;
        if (m >= 1) begin
          checks++;
          if (int'(a_q) != C[jj+1][m]) begin
            failures++;
            if (failures < 20) $display("FAIL j=%0d m=%0d got %0d exp %0d", jj, m, a_q, C[jj+1][m]);
          end
        end
      end
      @(negedge clk); step = 0; shift = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
