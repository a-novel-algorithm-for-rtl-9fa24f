// HW-OASM test system: one LEV CORE between an emulated input link and a
// result dump memory.
//
//   text ROM (link_emulator) --symbol per request--> substring_window
//     --t[i..], i--> lev_core --{i,k,l} results--> result_ram --> out_*
//   sys_fsm sequences the whole: start_elab plays the text (text_len symbols
//   loaded beforehand through rom_*) through the core and dumps every
//   validated occurrence into the RAM; result_return streams the RAM back
//   out on out_data/out_valid/out_ready, the port where a USB device
//   interface would attach.
//
// The pattern, its length lp (1..LP_MAX) and the threshold kth
// (0..K_MAX) are inputs; hold them stable during an elaboration.
// The defaults are the evaluated FPGA system: LP_MAX = 15, 3-bit symbols,
// K_MAX = 5, 16-bit index, a 1 Mbit text ROM and a 1 Mbit result RAM.
// Throughput: one text position every 2*lp + kth - 1 clocks (plus a held
// clock where a validation meets a sample, for kth large against lp; see
// lev_core).
//
// The blocks and data paths follow the paper's test system (input link
// emulator with ROM, LEV CORE, result RAM, USB side); its 1 Mbit memories
// and sizes are the paper's. The control signals, the handshakes and the
// result stream in place of the USB interface are this design's own.
module hw_oasm_system #(
  parameter int unsigned LP_MAX    = oasm_pkg::DEF_LP_MAX,
  parameter int unsigned SYMB_W    = oasm_pkg::DEF_SYMB_W,
  parameter int unsigned K_MAX     = oasm_pkg::DEF_K_MAX,
  parameter int unsigned IDX_W     = oasm_pkg::DEF_IDX_W,
  parameter int unsigned ROM_WORDS = 65536,
  parameter int unsigned RAM_DEPTH = 43690,
  localparam int unsigned SPW      = 5,
  localparam int unsigned TL_W     = 20,
  localparam int unsigned W        = LP_MAX + K_MAX,
  localparam int unsigned LP_W     = $clog2(LP_MAX + 1),
  localparam int unsigned K_W      = (K_MAX > 0) ? $clog2(K_MAX + 1) : 1,
  localparam int unsigned LEN_W    = $clog2(W + 1),
  localparam int unsigned RES_W    = IDX_W + K_W + LEN_W,
  localparam int unsigned RA_W     = $clog2(ROM_WORDS),
  localparam int unsigned N_W      = $clog2(RAM_DEPTH + 1)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start_elab,
  input  logic                     result_return,
  input  logic [LP_MAX*SYMB_W-1:0] pattern,
  input  logic [LP_W-1:0]          lp,
  input  logic [K_W-1:0]           kth,
  input  logic [TL_W-1:0]          text_len,
  input  logic                     rom_we,
  input  logic [RA_W-1:0]          rom_waddr,
  input  logic [SPW*SYMB_W-1:0]    rom_wdata,
  output logic [RES_W-1:0]         out_data,
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic                     busy,
  output logic                     done,
  output logic [N_W-1:0]           n_results,
  output logic                     overflow,
  output logic [31:0]              stall_cycles,
  output logic                     text_done
);
  logic                     restart, run, sym_req, sym_valid;
  logic [SYMB_W-1:0]        sym;
  logic [W*SYMB_W-1:0]      substring;
  logic                     sub_valid, sub_ack, core_valid, core_idle;
  logic [IDX_W-1:0]         index_stream;
  logic [31:0]              steps;
  logic [RES_W-1:0]         core_result, ram_wdata, ram_rdata;
  logic                     ram_we;
  logic [$clog2(RAM_DEPTH)-1:0] ram_waddr, ram_raddr;

  link_emulator #(.SYMB_W(SYMB_W), .SYMS_PER_WORD(SPW), .ROM_WORDS(ROM_WORDS), .LEN_W(TL_W)) u_link (
    .clk, .rst_n, .rom_we, .rom_waddr, .rom_wdata, .text_len, .restart,
    .sym_req, .sym_out (sym), .sym_valid, .text_done
  );

  substring_window #(.LP_MAX(LP_MAX), .K_MAX(K_MAX), .SYMB_W(SYMB_W), .IDX_W(IDX_W)) u_window (
    .clk, .rst_n, .restart, .sym_in (sym), .sym_valid, .sym_req,
    .advance (sub_ack), .substring, .sub_valid, .index_stream, .steps
  );

  lev_core #(.LP_MAX(LP_MAX), .SYMB_W(SYMB_W), .K_MAX(K_MAX), .IDX_W(IDX_W)) u_core (
    .clk, .rst_n, .run, .pattern, .lp, .kth, .substring, .sub_valid, .index_stream,
    .sub_ack, .result (core_result), .valid (core_valid), .idle (core_idle), .stall_cycles
  );

  result_ram #(.DEPTH(RAM_DEPTH), .WIDTH(RES_W)) u_ram (
    .clk, .we (ram_we), .waddr (ram_waddr), .wdata (ram_wdata), .raddr (ram_raddr), .rdata (ram_rdata)
  );

  sys_fsm #(.RES_W(RES_W), .RAM_DEPTH(RAM_DEPTH), .LEN_W(TL_W), .LP_W(LP_W), .K_W(K_W)) u_fsm (
    .clk, .rst_n, .start_elab, .result_return, .text_len, .lp, .kth, .steps,
    .core_idle, .core_valid, .core_result, .run, .restart,
    .ram_we, .ram_waddr, .ram_wdata, .ram_raddr, .ram_rdata,
    .out_data, .out_valid, .out_ready, .busy, .done, .n_results, .overflow
  );
endmodule
