// LEV CALC: counter-based systolic array computing, for one text position i,
// the Levenshtein distances between the pattern p and the substrings
// t[i, l] for every length l in [l_p - K, l_p + K].
//
// A start pulse samples the pattern, its length lp, the threshold kth, the
// window t[i .. i+LP_MAX+K_MAX-1] and the index i. The array of LP_MAX
// processing elements then fills the matrix C anti-diagonal by anti-diagonal,
// one step_calc per clock, for 2*lp + kth - 1 steps. Substring symbols enter
// element 0 one per step and move down one element per step; positions past
// lp + kth are the special symbol $2 and pattern positions past lp are $1.
// Element lp-1 holds the last row of C, so the output MUX selector sel_calc
// is lp-1: from step 2*lp - kth - 1 on, a_reg(lp-1) is c(lp, m) with target
// length m = cnt - lp + 1, i.e. lev(p, t[i, m]).
//
// Outputs: one sample per clock (samp_valid, lev_dist, target_len,
// samp_index) for every length m in [max(1, lp-kth), lp+kth], the last one
// flagged with samp_last. Each sample leaves one clock after its step. The
// next start may be given in the cycle of the last step (ready = 1), so
// consecutive text positions take exactly 2*lp + kth - 1 clocks each.
// hold (from LEV SEARCH) postpones a step that would produce a sample: the
// whole array then keeps its state for that clock (frozen = 1); steps that
// produce no sample go on regardless.
// Requires 1 <= lp <= LP_MAX and kth <= K_MAX. kth >= lp is accepted:
// the empty target (length 0) is never sampled.
//
// From the paper: the counter-driven array, the $1/$2 padding symbols, the
// 2*lp+kth-1 step count and the output MUX on row lp. This design's own
// choices: the one-clock output register, the hold/frozen back-pressure and
// starting the next position during the last step.
module lev_calc #(
  parameter int unsigned LP_MAX = oasm_pkg::DEF_LP_MAX,
  parameter int unsigned K_MAX  = oasm_pkg::DEF_K_MAX,
  parameter int unsigned SYMB_W = oasm_pkg::DEF_SYMB_W,
  parameter int unsigned IDX_W  = oasm_pkg::DEF_IDX_W,
  localparam int unsigned W     = LP_MAX + K_MAX,
  localparam int unsigned LP_W  = $clog2(LP_MAX + 1),
  localparam int unsigned K_W   = (K_MAX > 0) ? $clog2(K_MAX + 1) : 1,
  localparam int unsigned LEN_W = $clog2(W + 1),
  localparam int unsigned D_W   = $clog2(2*LP_MAX + K_MAX + 1),
  localparam int unsigned J_W   = (LP_MAX > 1) ? $clog2(LP_MAX) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic                     hold,
  input  logic [LP_MAX*SYMB_W-1:0] pattern,
  input  logic [LP_W-1:0]          lp,
  input  logic [K_W-1:0]           kth,
  input  logic [W*SYMB_W-1:0]      substring,
  input  logic [IDX_W-1:0]         index_in,
  output logic                     busy,
  output logic                     ready,
  output logic                     samp_valid,
  output logic [LEN_W-1:0]         lev_dist,
  output logic [LEN_W-1:0]         target_len,
  output logic [IDX_W-1:0]         samp_index,
  output logic                     samp_last,
  output logic                     frozen
);
  localparam logic [SYMB_W-1:0] D1 = SYMB_W'(oasm_pkg::dollar1(SYMB_W));
  localparam logic [SYMB_W-1:0] D2 = SYMB_W'(oasm_pkg::dollar2(SYMB_W));

  logic [D_W-1:0]    cnt, nsteps;
  logic [LP_W-1:0]   lp_r;
  logic [K_W-1:0]    kth_r;
  logic [IDX_W-1:0]  idx_r;
  logic [SYMB_W-1:0] p_reg [LP_MAX];
  logic [SYMB_W-1:0] src   [W];       // substring symbols still to enter
  logic [SYMB_W-1:0] sh_in [LP_MAX];
  logic [SYMB_W-1:0] sh_q  [LP_MAX];
  logic [D_W-1:0]    a_q   [LP_MAX];
  logic [D_W-1:0]    a_d_q [LP_MAX];
  logic [J_W-1:0]    sel_calc;        // output MUX select = lp - 1
  logic [J_W-1:0]    sel_out;
  logic              last_step, load, step;
  logic              in_range;
  int                m;

  // a step whose sample LEV SEARCH could not take waits one clock
  assign frozen    = hold && in_range;
  assign step      = busy && !frozen;
  assign last_step = busy && (cnt == nsteps);
  assign ready     = !busy || (last_step && !frozen);
  assign load      = start && ready;

  // symbol entering element 0 for the next step, and the shift chain
  always_comb begin
    for (int unsigned j = 0; j < LP_MAX; j++) begin
      if (load)      sh_in[j] = (j == 0) ? substring[0 +: SYMB_W] : D2;
      else if (j==0) begin
        sh_in[j] = D2;
        for (int unsigned q = 0; q < W; q++) if (int'(cnt) == q) sh_in[j] = src[q];
      end
      else           sh_in[j] = sh_q[j-1];
    end
  end

  for (genvar g = 0; g < LP_MAX; g++) begin : g_pe
    lev_pe #(.SYMB_W(SYMB_W), .D_W(D_W), .J_W(J_W)) u_pe (
      .clk     (clk),
      .step    (step),
      .shift   (load || step),
      .j       (J_W'(g)),
      .cnt     (cnt),
      .p_sym   (p_reg[g]),
      .sh_in   (sh_in[g]),
      .up      ((g == 0) ? '0 : a_q[(g == 0) ? 0 : g-1]),
      .up_left ((g == 0) ? '0 : a_d_q[(g == 0) ? 0 : g-1]),
      .sh_q    (sh_q[g]),
      .a_q     (a_q[g]),
      .a_d_q   (a_d_q[g])
    );
  end

  // sample window: target length m = cnt - lp + 1 in [max(1, lp-kth), lp+kth]
  always_comb begin
    m        = int'(cnt) - int'(lp_r) + 1;
    in_range = busy && (m >= 1) && (m >= int'(lp_r) - int'(kth_r)) && (m <= int'(lp_r) + int'(kth_r));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy       <= 1'b0;
      cnt        <= '0;
      nsteps     <= '0;
      lp_r       <= LP_W'(1);
      kth_r      <= '0;
      idx_r      <= '0;
      sel_calc   <= '0;
      samp_valid <= 1'b0;
      samp_last  <= 1'b0;
      target_len <= '0;
      samp_index <= '0;
      for (int unsigned j = 0; j < LP_MAX; j++) p_reg[j] <= D1;
      for (int unsigned j = 0; j < W; j++) src[j] <= D2;
    end else begin
      samp_valid <= in_range && !frozen;
      samp_last  <= in_range && !frozen && last_step;
      target_len <= LEN_W'(m);
      samp_index <= idx_r;
      if (load) begin
        busy     <= 1'b1;
        cnt      <= D_W'(1);
        nsteps   <= D_W'(2 * int'(lp) + int'(kth) - 1);
        lp_r     <= lp;
        kth_r    <= kth;
        idx_r    <= index_in;
        sel_calc <= J_W'(int'(lp) - 1);
        for (int unsigned j = 0; j < LP_MAX; j++)
          p_reg[j] <= (j < lp) ? pattern[j*SYMB_W +: SYMB_W] : D1;
        for (int unsigned j = 0; j < W; j++)
          src[j] <= (j < int'(lp) + int'(kth)) ? substring[j*SYMB_W +: SYMB_W] : D2;
      end else if (frozen) begin
        busy <= 1'b1;                  // the whole array keeps its state
      end else if (last_step) begin
        busy <= 1'b0;
      end else if (busy) begin
        cnt <= cnt + D_W'(1);
      end
    end
  end

  // output MUX (sel_calc): last row of C
  always_ff @(posedge clk) sel_out <= sel_calc;  // select of the step just done
  assign lev_dist = LEN_W'(a_q[sel_out]);

endmodule
