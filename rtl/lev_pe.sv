// Processing element j of the LEV CALC systolic array.
//
// Element j owns row j+1 of the Levenshtein matrix C: during step_calc number
// cnt (1 on the first step) it computes c(j+1, cnt-j) from its neighbours and
// registers it in a_reg; a_reg_d keeps the value of the step before. The
// shifting substring symbol enters sh_reg from the previous element (or from
// the substring for j = 0), so that sh_reg(j) holds s[cnt-1-j].
//
//   l_comb = min(c_left, c_upper, c_upper_left) + phi
//   phi    = 1 if c_upper_left > min, else (p_reg != sh_reg)
//
// as in the paper. The operands follow the recurrence of C: c_upper is
// a_reg(j-1) (cnt for j = 0), c_upper_left is a_reg_d(j-1), c_left is this
// element's own a_reg; where a neighbour lies in column 0 or row 0 the step
// counter supplies its value (cnt or cnt-1). The paper's printed equation
// names a_reg_d(j) as the left neighbour and tests j < cnt; both are
// adjusted here so that the array computes exactly the recurrence of C.
//
// Timing: sh_reg loads on the cycle before a step (load/shift); a_reg and
// a_reg_d update at the end of each step cycle (step = 1).
module lev_pe #(
  parameter int unsigned SYMB_W = oasm_pkg::DEF_SYMB_W,
  parameter int unsigned D_W    = 6,
  parameter int unsigned J_W    = 4
) (
  input  logic              clk,
  input  logic              step,      // a step_calc is executed this cycle
  input  logic              shift,     // load sh_reg for the next step
  input  logic [J_W-1:0]    j,         // index of this element
  input  logic [D_W-1:0]    cnt,       // current step number, 1-based
  input  logic [SYMB_W-1:0] p_sym,     // p_reg(j) (pattern symbol or $1)
  input  logic [SYMB_W-1:0] sh_in,     // symbol shifted in from element j-1
  input  logic [D_W-1:0]    up,        // a_reg(j-1)
  input  logic [D_W-1:0]    up_left,   // a_reg_d(j-1)
  output logic [SYMB_W-1:0] sh_q,      // sh_reg(j)
  output logic [D_W-1:0]    a_q,       // a_reg(j)
  output logic [D_W-1:0]    a_d_q      // a_reg_d(j)
);
  logic [D_W-1:0] c_left, c_upper, c_ul, mn, l_comb;
  logic           phi;
  logic           inner;               // left / upper-left are inside C

  always_comb begin
    inner   = ({{(D_W-J_W){1'b0}}, j} + D_W'(1)) < cnt;  // j < cnt-1
    c_left  = inner ? a_q : cnt;
    c_upper = (j == '0) ? cnt : up;
    c_ul    = (inner && j != '0) ? up_left : cnt - D_W'(1);
    mn      = (c_left < c_upper) ? c_left : c_upper;
    if (c_ul < mn) mn = c_ul;
    phi     = (c_ul > mn) ? 1'b1 : (p_sym != sh_q);
    l_comb  = mn + D_W'(phi);
  end

  always_ff @(posedge clk) begin
    if (shift) sh_q <= sh_in;
    if (step) begin
      a_q   <= l_comb;
      a_d_q <= a_q;
    end
  end
endmodule
