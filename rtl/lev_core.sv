// LEV CORE: online approximate string matcher for one pattern.
//
// For every text position i the core takes the window t[i ..] (substring),
// lets LEV CALC compute lev(p, t[i, l]) for l = lp-kth .. lp+kth and feeds
// the distances to LEV SEARCH, which keeps only the occurrences allowed by
// the priority rules and emits each validated one as
// result = {index, k, length} with a one-clock valid.
//
// Step sequencing (one step_search per text position): a new position is
// started (sub_ack = 1, the window may then advance) when run and sub_valid
// are high and LEV CALC is in its last step or idle, so a position costs
// 2*lp + kth - 1 clocks. LEV SEARCH works on the tail of one position while
// LEV CALC runs the next. When LEV SEARCH is busy with the end of a position
// or with a validation it raises hold, and LEV CALC postpones any step that
// would hand it a sample; stall_cycles counts those postponed clocks. With
// max(1, lp-kth) + lp - 1 >= kth + 3 the first sample of a position always
// comes late enough and no clock is lost; otherwise a clock is lost only
// where a validation (or an end-of-position step) actually meets a sample.
//
// The split into LEV CALC and LEV SEARCH and the 2*lp+K-1 clocks per
// position follow the paper; the overlap of consecutive positions and the
// hold mechanism are this design's own.
module lev_core #(
  parameter int unsigned LP_MAX = oasm_pkg::DEF_LP_MAX,
  parameter int unsigned SYMB_W = oasm_pkg::DEF_SYMB_W,
  parameter int unsigned K_MAX  = oasm_pkg::DEF_K_MAX,
  parameter int unsigned IDX_W  = oasm_pkg::DEF_IDX_W,
  parameter int unsigned R_W    = oasm_pkg::DEF_R_W,
  localparam int unsigned W     = LP_MAX + K_MAX,
  localparam int unsigned LP_W  = $clog2(LP_MAX + 1),
  localparam int unsigned K_W   = (K_MAX > 0) ? $clog2(K_MAX + 1) : 1,
  localparam int unsigned LEN_W = $clog2(W + 1),
  localparam int unsigned RES_W = IDX_W + K_W + LEN_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     run,
  input  logic [LP_MAX*SYMB_W-1:0] pattern,
  input  logic [LP_W-1:0]          lp,
  input  logic [K_W-1:0]           kth,
  input  logic [W*SYMB_W-1:0]      substring,
  input  logic                     sub_valid,
  input  logic [IDX_W-1:0]         index_stream,
  output logic                     sub_ack,
  output logic [RES_W-1:0]         result,
  output logic                     valid,
  output logic                     idle,
  output logic [31:0]              stall_cycles
);
  logic             calc_busy, calc_ready, search_busy, hold, frozen;
  logic             samp_valid, samp_last;
  logic [LEN_W-1:0] lev_dist, target_len;
  logic [IDX_W-1:0] samp_index;

  assign sub_ack = run && sub_valid && calc_ready;
  assign idle    = !calc_busy && !search_busy;

  always_ff @(posedge clk) begin
    if (!rst_n)      stall_cycles <= '0;
    else if (frozen) stall_cycles <= stall_cycles + 32'd1;
  end

  lev_calc #(.LP_MAX(LP_MAX), .K_MAX(K_MAX), .SYMB_W(SYMB_W), .IDX_W(IDX_W)) u_calc (
    .clk, .rst_n,
    .start      (sub_ack),
    .hold,
    .pattern, .lp, .kth, .substring,
    .index_in   (index_stream),
    .busy       (calc_busy),
    .ready      (calc_ready),
    .samp_valid, .lev_dist, .target_len, .samp_index, .samp_last,
    .frozen
  );

  lev_search #(.K_MAX(K_MAX), .IDX_W(IDX_W), .LEN_W(LEN_W), .R_W(R_W)) u_search (
    .clk, .rst_n, .kth,
    .samp_valid, .lev_dist, .target_len, .samp_index, .samp_last,
    .result, .valid,
    .busy (search_busy),
    .hold
  );
endmodule
