// LINK EMULATOR: stands in for a high-speed input link by playing a text
// stored in an on-chip ROM, one symbol per request pulse.
//
// The ROM has ROM_WORDS words of SYMS_PER_WORD symbols (5 symbols of 3 bits
// by default, symbol 0 in the low bits), about 1 Mbit. A request (sym_req)
// at clock n gives sym_valid and the symbol at clock n+1: the word is read
// synchronously and the symbol picked from it. After text_len symbols the
// emulator answers with the padding symbol $2, so a finite text ends in
// windows that match nothing; text_done is then high. restart rewinds to
// t[0]. The write port (rom_we/rom_waddr/rom_wdata) only loads the text, the
// job a configuration bitstream does on an FPGA.
//
// The paper's test system emulates the link with a ROM holding the text;
// the packing of five symbols per word, the request protocol and the
// padding after the text are this design's choices.
module link_emulator #(
  parameter int unsigned SYMB_W        = oasm_pkg::DEF_SYMB_W,
  parameter int unsigned SYMS_PER_WORD = 5,
  parameter int unsigned ROM_WORDS     = 65536,
  parameter int unsigned LEN_W         = 20,
  localparam int unsigned WORD_W       = SYMB_W * SYMS_PER_WORD,
  localparam int unsigned A_W          = $clog2(ROM_WORDS),
  localparam int unsigned S_W          = (SYMS_PER_WORD > 1) ? $clog2(SYMS_PER_WORD) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              rom_we,
  input  logic [A_W-1:0]    rom_waddr,
  input  logic [WORD_W-1:0] rom_wdata,
  input  logic [LEN_W-1:0]  text_len,
  input  logic              restart,
  input  logic              sym_req,
  output logic [SYMB_W-1:0] sym_out,
  output logic              sym_valid,
  output logic              text_done
);
  localparam logic [SYMB_W-1:0] D2 = SYMB_W'(oasm_pkg::dollar2(SYMB_W));

  logic [WORD_W-1:0] rom [ROM_WORDS];
  logic [WORD_W-1:0] rom_q;
  logic [A_W-1:0]    addr;
  logic [S_W-1:0]    sub, sub_q;
  logic [LEN_W-1:0]  sent;
  logic              pad_q;

  always_ff @(posedge clk) begin
    if (rom_we) rom[rom_waddr] <= rom_wdata;
    if (sym_req) rom_q <= rom[addr];
  end

  always_ff @(posedge clk) begin
    if (!rst_n || restart) begin
      addr      <= '0;
      sub       <= '0;
      sent      <= '0;
      sym_valid <= 1'b0;
      sub_q     <= '0;
      pad_q     <= 1'b0;
    end else begin
      sym_valid <= sym_req;
      if (sym_req) begin
        sub_q <= sub;
        pad_q <= (sent >= text_len);
        if (sent < text_len) begin
          sent <= sent + LEN_W'(1);
          if (int'(sub) == SYMS_PER_WORD - 1) begin
            sub  <= '0;
            addr <= addr + A_W'(1);
          end else begin
            sub <= sub + S_W'(1);
          end
        end
      end
    end
  end

  assign sym_out   = pad_q ? D2 : rom_q[sub_q*SYMB_W +: SYMB_W];
  assign text_done = (sent >= text_len);
endmodule
