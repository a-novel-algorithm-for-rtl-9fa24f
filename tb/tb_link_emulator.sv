// Self-checking testbench of link_emulator: loads a random text of 103
// symbols into the ROM (5 symbols per word, symbol 0 in the low bits),
// requests symbols with random gaps and checks that each answer comes one
// clock after its request and carries the next text symbol, that the
// padding symbol follows the end of the text together with text_done, and
// that restart plays the text again from its first symbol.
//
// The paper gives no behaviour for the link beyond playing the text, so
// the checks follow this design's own protocol.
module tb_link_emulator;
  localparam int SYMB_W = 3, SPW = 5, ROM_WORDS = 65536, TL = 103;
  logic clk = 0, rst_n = 0, rom_we = 0, restart = 0, sym_req = 0;
  logic [15:0] rom_waddr = '0;
  logic [14:0] rom_wdata = '0;
  logic [19:0] text_len = 20'(TL);
  logic [SYMB_W-1:0] sym_out;
  logic sym_valid, text_done;
  link_emulator dut (.*);
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int text [TL];
  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  function automatic void chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endfunction
  task automatic play(int n);
    for (int q = 0; q < n; q++) begin
      int e;
      repeat ($urandom_range(0, 3)) @(negedge clk);
      @(negedge clk); sym_req = 1;
      @(negedge clk); sym_req = 0;
      e = (q < TL) ? text[q] : 6;
      chk(sym_valid && int'(sym_out) == e, $sformatf("symbol %0d: valid=%0d got %0d exp %0d", q, sym_valid, sym_out, e));
      chk(text_done == (q >= TL - 1), $sformatf("text_done after symbol %0d", q));
    end
  endtask
  initial begin
    for (int q = 0; q < TL; q++) text[q] = $urandom_range(0, 3);
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int w = 0; w * SPW < TL; w++) begin
      @(negedge clk);
      rom_we = 1; rom_waddr = 16'(w);
      for (int s = 0; s < SPW; s++) rom_wdata[s*SYMB_W +: SYMB_W] = (w*SPW + s < TL) ? 3'(text[w*SPW + s]) : 3'd0;
    end
    @(negedge clk); rom_we = 0;
    play(TL + 7);
    @(negedge clk); restart = 1;
    @(negedge clk); restart = 0;
    play(20);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
