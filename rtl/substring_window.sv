// Substring window over the text stream.
//
// A shift register of W = LP_MAX + K_MAX symbols that presents
// t[i .. i+W-1] to LEV CORE, t[i] in the low bits, together with the stream
// index i (index_stream, IDX_W bits, wrapping). When the core accepts the
// window (advance) the register shifts by one symbol and i increments; the
// freed slot is refilled from the text source, which is asked for one
// symbol at a time with a one-clock request pulse (sym_req) and answers
// with sym_valid after any number of clocks; one request is outstanding at
// most. sub_valid is high while all W slots hold current symbols. steps
// counts accepted windows with a 32-bit counter that does not wrap in
// practice; restart empties the window and zeroes both counters.
//
// The paper shows the substring and index_stream entering LEV CORE but does
// not say how they are produced: this window and its handshake are this
// design's own.
module substring_window #(
  parameter int unsigned LP_MAX = oasm_pkg::DEF_LP_MAX,
  parameter int unsigned K_MAX  = oasm_pkg::DEF_K_MAX,
  parameter int unsigned SYMB_W = oasm_pkg::DEF_SYMB_W,
  parameter int unsigned IDX_W  = oasm_pkg::DEF_IDX_W,
  localparam int unsigned W     = LP_MAX + K_MAX,
  localparam int unsigned F_W   = $clog2(W + 1)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                restart,
  input  logic [SYMB_W-1:0]   sym_in,
  input  logic                sym_valid,
  output logic                sym_req,
  input  logic                advance,
  output logic [W*SYMB_W-1:0] substring,
  output logic                sub_valid,
  output logic [IDX_W-1:0]    index_stream,
  output logic [31:0]         steps
);
  logic [SYMB_W-1:0] win [W];
  logic [F_W-1:0]    fill;
  logic              pending;

  always_comb begin
    for (int unsigned k = 0; k < W; k++) substring[k*SYMB_W +: SYMB_W] = win[k];
    sub_valid = (fill == F_W'(W));
    sym_req   = !restart && !pending && (fill < F_W'(W));
  end

  always_ff @(posedge clk) begin
    if (!rst_n || restart) begin
      fill         <= '0;
      pending      <= 1'b0;
      index_stream <= '0;
      steps        <= '0;
      for (int unsigned k = 0; k < W; k++) win[k] <= '0;
    end else begin
      automatic int f = int'(fill);
      if (advance && sub_valid) begin
        for (int unsigned k = 0; k + 1 < W; k++) win[k] <= win[k+1];
        f            = f - 1;
        index_stream <= index_stream + IDX_W'(1);
        steps        <= steps + 32'd1;
      end
      if (sym_valid) begin
        win[f] <= sym_in;
        f      = f + 1;
      end
      fill <= F_W'(f);
      if (sym_req)        pending <= 1'b1;
      else if (sym_valid) pending <= 1'b0;
    end
  end
endmodule
