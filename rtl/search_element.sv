// SEARCH ELEMENT k of LEV SEARCH: one row o_reg[k] of the occurrence memory.
//
// The row stores the occurrence with priority (edit distance) k that is
// waiting for validation: its start index i (o_index), its length l
// (o_len) and its validation counter r (o_r). Three controls from ENA GEN
// act on it, with preset taking precedence as in the paper's schematic:
//   preset  : index <= PRESET_INDEX (stands for l_t), length <= k+1, r <= 0
//   ena     : index <= index_stream, length <= target_len, r <= 1
//   ena_acc : r <= r + 1 (saturating)
// Loading r = 1 together with a new occurrence follows the algorithm's
// "mem[idx] = [i, l, 1]"; the occupancy flag o_vld (set by ena, cleared by
// preset) is an addition of this design so that empty rows are neither
// counted nor validated. All updates take effect at the next clock edge.
module search_element #(
  parameter int unsigned K_IDX = 0,
  parameter int unsigned IDX_W = oasm_pkg::DEF_IDX_W,
  parameter int unsigned LEN_W = 5,
  parameter int unsigned R_W   = oasm_pkg::DEF_R_W,
  parameter logic [IDX_W-1:0] PRESET_INDEX = '1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             ena,
  input  logic             preset,
  input  logic             ena_acc,
  input  logic [IDX_W-1:0] index_stream,
  input  logic [LEN_W-1:0] target_len,
  output logic [IDX_W-1:0] o_index,
  output logic [LEN_W-1:0] o_len,
  output logic [R_W-1:0]   o_r,
  output logic             o_vld
);
  always_ff @(posedge clk) begin
    if (!rst_n || preset) begin
      o_index <= PRESET_INDEX;
      o_len   <= LEN_W'(K_IDX + 1);
      o_r     <= '0;
      o_vld   <= 1'b0;
    end else if (ena) begin
      o_index <= index_stream;
      o_len   <= target_len;
      o_r     <= R_W'(1);
      o_vld   <= 1'b1;
    end else if (ena_acc && o_r != '1) begin
      o_r     <= o_r + R_W'(1);
    end
  end
endmodule
