// LEV SEARCH: search and validation of occurrences.
//
// K_MAX+1 SEARCH ELEMENTs hold the pending occurrence of each priority
// k = 0 .. K_MAX (the algorithm's mem, here o_reg); ENA GEN applies the
// priority rules to each incoming [i, l, k] sample and runs the validation;
// the output MUX, steered by sel_search, presents the validated row as
// result = {index (IDX_W), k (K_W), length (LEN_W)} with a one-clock valid.
// Samples arrive one per clock from LEV CALC; the rows of one validation
// leave on consecutive clocks (see ena_gen for the timing); hold tells
// LEV CALC not to deliver a sample in the next clock.
//
// The structure (one SEARCH ELEMENT per k, ENA GEN, output MUX on
// sel_search) follows the paper's figure of LEV SEARCH; the result word
// layout and the hold signal are this design's choice.
module lev_search #(
  parameter int unsigned K_MAX = oasm_pkg::DEF_K_MAX,
  parameter int unsigned IDX_W = oasm_pkg::DEF_IDX_W,
  parameter int unsigned LEN_W = 5,
  parameter int unsigned R_W   = oasm_pkg::DEF_R_W,
  localparam int unsigned K_W  = (K_MAX > 0) ? $clog2(K_MAX + 1) : 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [K_W-1:0]         kth,
  input  logic                   samp_valid,
  input  logic [LEN_W-1:0]       lev_dist,
  input  logic [LEN_W-1:0]       target_len,
  input  logic [IDX_W-1:0]       samp_index,
  input  logic                   samp_last,
  output logic [IDX_W+K_W+LEN_W-1:0] result,
  output logic                   valid,
  output logic                   busy,
  output logic                   hold
);
  logic [K_MAX:0][IDX_W-1:0] o_index;
  logic [K_MAX:0][LEN_W-1:0] o_len;
  logic [K_MAX:0][R_W-1:0]   o_r;
  logic [K_MAX:0]            o_vld, ena, preset, ena_acc;
  logic [K_W-1:0]            sel_search;

  ena_gen #(.K_MAX(K_MAX), .IDX_W(IDX_W), .LEN_W(LEN_W), .R_W(R_W)) u_ena_gen (
    .clk, .rst_n, .kth, .samp_valid, .lev_dist, .target_len, .samp_index, .samp_last,
    .o_index, .o_len, .o_r, .o_vld, .ena, .preset, .ena_acc, .sel_search, .valid, .busy, .hold
  );

  for (genvar k = 0; k <= K_MAX; k++) begin : g_se
    search_element #(.K_IDX(k), .IDX_W(IDX_W), .LEN_W(LEN_W), .R_W(R_W)) u_se (
      .clk, .rst_n,
      .ena          (ena[k]),
      .preset       (preset[k]),
      .ena_acc      (ena_acc[k]),
      .index_stream (samp_index),
      .target_len   (target_len),
      .o_index      (o_index[k]),
      .o_len        (o_len[k]),
      .o_r          (o_r[k]),
      .o_vld        (o_vld[k])
    );
  end

  // result MUX
  assign result = {o_index[sel_search], sel_search, o_len[sel_search]};
endmodule
