// ENA GEN: the control of LEV SEARCH, implementing the online search and
// validation algorithm (OASM).
//
// State: idx (priority of the best pending occurrence, a status register),
// ins (some occurrence is pending, a flag), acc (accumulated length of the
// occurrences already emitted in the current validation).
//
// Per sample [i, l, k] (one per clock, from LEV CALC), when k <= kth:
//   R1      : nothing pending, or k < idx        -> store in row k, idx <= k
//   R2 / R3 : k == idx and the new substring ends no later than the stored
//             one (i + l <= i' + l')              -> replace row idx
//   else    : discarded (shadow hit).
// The R2/R3 form reproduces the paper's worked example (mem table); the
// literal wording "the first encountered becomes an occurrence" does not.
//
// One clock after the last sample of a text position (eos):
//   if ins and r(idx) == l(idx): validation starts; otherwise every occupied
//   row j >= idx counts (ena_acc).
// Validation visits rows j = idx .. kth, one per clock. Row idx is always
// emitted; a lower-priority row j is emitted when r(j) - acc > l(j), the
// paper's Eq. 3 (its end lies before the start of the occurrences already
// emitted); acc then grows by l(j). Each emitted row gives a valid pulse
// with sel_search = j. On the last row every element is preset and idx,
// ins, acc return to their initial values.
//
// busy is high while a sample, the eos step or a validation is in flight.
// hold asks LEV CALC to deliver no sample in the next clock. It covers the
// eos clock and every validation clock but the last, so no sample can meet
// a validation, whose closing preset would erase it. A sample may come in
// the clock after the last validation row.
//
// From the paper: the rules R1-R3, the status register idx, the flag ins,
// the counting of rows j >= idx, the validation order and Eq. 3 (Alg. 1).
// This design's own choices: the end-of-position clock, one row per clock
// in validation, the occupancy bits o_vld and the hold back-pressure.
module ena_gen #(
  parameter int unsigned K_MAX = oasm_pkg::DEF_K_MAX,
  parameter int unsigned IDX_W = oasm_pkg::DEF_IDX_W,
  parameter int unsigned LEN_W = 5,
  parameter int unsigned R_W   = oasm_pkg::DEF_R_W,
  localparam int unsigned K_W  = (K_MAX > 0) ? $clog2(K_MAX + 1) : 1
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [K_W-1:0]             kth,
  input  logic                       samp_valid,
  input  logic [LEN_W-1:0]           lev_dist,
  input  logic [LEN_W-1:0]           target_len,
  input  logic [IDX_W-1:0]           samp_index,
  input  logic                       samp_last,
  input  logic [K_MAX:0][IDX_W-1:0]  o_index,
  input  logic [K_MAX:0][LEN_W-1:0]  o_len,
  input  logic [K_MAX:0][R_W-1:0]    o_r,
  input  logic [K_MAX:0]             o_vld,
  output logic [K_MAX:0]             ena,
  output logic [K_MAX:0]             preset,
  output logic [K_MAX:0]             ena_acc,
  output logic [K_W-1:0]             sel_search,
  output logic                       valid,
  output logic                       busy,
  output logic                       hold
);
  logic [K_W-1:0] idx, j;
  logic           ins, eos, validating;
  logic [R_W:0]   acc;

  logic           hit, r1, r23, done_top, accept, last_row;
  logic [K_W-1:0] kk;
  logic [IDX_W-1:0] end_new, end_old, end_diff;

  always_comb begin
    kk       = K_W'(lev_dist);
    hit      = samp_valid && !validating && (lev_dist <= LEN_W'(kth));
    end_new  = samp_index + IDX_W'(target_len);
    end_old  = o_index[idx] + IDX_W'(o_len[idx]);
    end_diff = end_old - end_new;                   // >= 0: new ends no later
    r1       = hit && (!ins || kk < idx);
    r23      = hit && ins && (kk == idx) && !end_diff[IDX_W-1];
    done_top = ins && (o_r[idx] == R_W'(o_len[idx]));
    last_row = (j >= kth) || (j == K_W'(K_MAX));
    accept   = validating && o_vld[j] &&
               ((j == idx) || ({1'b0, o_r[j]} > acc + (R_W+1)'(o_len[j])));
    for (int unsigned k = 0; k <= K_MAX; k++) begin
      ena[k]     = (r1 && kk == K_W'(k)) || (r23 && idx == K_W'(k));
      preset[k]  = validating && last_row;
      ena_acc[k] = eos && !done_top && o_r[idx] != R_W'(o_len[idx]) &&
                   o_vld[k] && (K_W'(k) >= idx);
    end
    valid      = accept;
    sel_search = j;
    busy       = samp_valid || eos || validating;
    // no sample may arrive in the eos clock or before the last validation row
    hold       = (samp_valid && samp_last) || eos || (validating && !last_row);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      idx        <= K_W'(K_MAX);
      ins        <= 1'b0;
      acc        <= '0;
      eos        <= 1'b0;
      validating <= 1'b0;
      j          <= '0;
    end else begin
      eos <= samp_valid && samp_last;
      if (r1) begin
        idx <= kk;
        ins <= 1'b1;
      end
      if (eos && done_top) begin
        validating <= 1'b1;
        j          <= idx;
        acc        <= '0;
      end
      if (validating) begin
        if (accept) acc <= acc + (R_W+1)'(o_len[j]);
        if (last_row) begin
          validating <= 1'b0;
          idx        <= K_W'(K_MAX);
          ins        <= 1'b0;
          acc        <= '0;
        end else begin
          j <= j + K_W'(1);
        end
      end
    end
  end

  // the sample source must obey hold: no sample meets a validation
  a_no_sample_in_validation: assert property (@(posedge clk) disable iff (!rst_n)
    !(samp_valid && validating));
endmodule
