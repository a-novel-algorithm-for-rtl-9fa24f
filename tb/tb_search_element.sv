// Self-checking testbench of search_element.
//
// Random sequences of ena / preset / ena_acc are applied to a row with
// priority K_IDX = 3 and a small 4-bit counter; after every clock the row
// is compared with a model: preset gives (all-ones index, K_IDX+1, 0,
// empty), ena stores (index, length, 1, occupied), ena_acc counts up to
// and then holds at 15, preset wins over ena and ena over ena_acc.
//
// The preset, load and count behaviour checked is the paper's search
// element; the saturation and the occupancy bit are this design's own.
module tb_search_element;
  localparam int IDX_W = 16, LEN_W = 5, R_W = 4, KI = 3;
  logic clk = 0, rst_n = 0, ena = 0, preset = 0, ena_acc = 0;
  logic [IDX_W-1:0] index_stream = '0, o_index;
  logic [LEN_W-1:0] target_len = '0, o_len;
  logic [R_W-1:0] o_r;
  logic o_vld;

  search_element #(.K_IDX(KI), .IDX_W(IDX_W), .LEN_W(LEN_W), .R_W(R_W)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int mi, ml, mr, mv, saturations = 0;
  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_row(string what);
    checks++;
    if (int'(o_index) != mi || int'(o_len) != ml || int'(o_r) != mr || int'(o_vld) != mv) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d,%0d,%0d,%0d exp %0d,%0d,%0d,%0d", what, o_index, o_len, o_r, o_vld, mi, ml, mr, mv);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    mi = 65535; ml = KI + 1; mr = 0; mv = 0;
    expect_row("after reset");
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      preset  = ($urandom_range(0, 19) == 0);
      ena     = ($urandom_range(0, 9) == 0);
      ena_acc = ($urandom_range(0, 3) != 0);
      index_stream = IDX_W'($urandom);
      target_len = LEN_W'($urandom);
      if (preset) begin mi = 65535; ml = KI + 1; mr = 0; mv = 0; end
      else if (ena) begin mi = int'(index_stream); ml = int'(target_len); mr = 1; mv = 1; end
      else if (ena_acc) begin if (mr == 15) saturations++; else mr++; end
      @(posedge clk); #1;
      expect_row($sformatf("cycle %0d", t));
    end
    checks++;
    if (saturations == 0) begin failures++; $display("FAIL counter never saturated"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
