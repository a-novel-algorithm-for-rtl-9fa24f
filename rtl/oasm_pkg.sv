// Shared constants of the online approximate string matcher (OASM).
//
// The defaults are those of the FPGA test system the design was evaluated
// on: patterns of up to 15 symbols, 3-bit symbols, thresholds up to K = 5,
// a 16-bit stream index and a 5-bit occurrence length. The two special
// symbols of the systolic array are placed at the top of the code space:
// $1 (unused pattern position) is all ones and $2 (unused substring
// position) is all ones minus one; ordinary text symbols must use the codes
// below them. That encoding, and the 16-bit width of the occurrence
// counters (DEF_R_W), are this design's choices. The constants are read by
// the modules as parameter defaults, so a lint of this package on its own
// reports them as unused.
package oasm_pkg;
  localparam int unsigned DEF_LP_MAX = 15;
  localparam int unsigned DEF_SYMB_W = 3;
  localparam int unsigned DEF_K_MAX  = 5;
  localparam int unsigned DEF_IDX_W  = 16;
  localparam int unsigned DEF_R_W    = 16;

  // Special symbol $1: fills pattern registers beyond the pattern length.
  function automatic logic [31:0] dollar1(int unsigned symb_w);
    return (32'd1 << symb_w) - 32'd1;
  endfunction

  // Special symbol $2: fills substring positions beyond l_p + K.
  function automatic logic [31:0] dollar2(int unsigned symb_w);
    return (32'd1 << symb_w) - 32'd2;
  endfunction
endpackage
