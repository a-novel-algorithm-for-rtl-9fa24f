// Self-checking testbench of result_ram: writes random words to random
// addresses of a full-size RAM (keeping a copy in an associative array),
// reads addresses back while writing others and checks that read data
// arrive one clock after the address, including a read of an address
// written in the same clock (old data is returned).
//
// A plain memory check; nothing in it is specific to the paper.
module tb_result_ram;
  localparam int DEPTH = 43690, WIDTH = 24, A_W = 16;
  logic clk = 0, we = 0;
  logic [A_W-1:0] waddr = '0, raddr = '0;
  logic [WIDTH-1:0] wdata = '0, rdata;
  result_ram dut (.*);
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [WIDTH-1:0] model [int];
  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    int a;
    logic [WIDTH-1:0] expv;
    bit have;
    // fill a set of addresses, including the first and last
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      a = (t == 0) ? 0 : (t == 1) ? DEPTH - 1 : $urandom_range(0, DEPTH - 1);
      we = 1; waddr = A_W'(a); wdata = WIDTH'($urandom);
      model[a] = wdata;
    end
    @(negedge clk); we = 0;
    // read back with concurrent writes to other addresses
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      do a = $urandom_range(0, DEPTH - 1); while (!model.exists(a) && t % 2 == 0);
      raddr = A_W'(a);
      have = model.exists(a);
      expv = have ? model[a] : '0;
      we = ($urandom_range(0, 1) == 1);
      waddr = A_W'($urandom_range(0, DEPTH - 1));
      wdata = WIDTH'($urandom);
      @(posedge clk); #1;
      if (have) begin
        checks++;
        if (rdata !== expv) begin failures++; if (failures < 20) $display("FAIL addr %0d got %h exp %h", a, rdata, expv); end
      end
      if (we) model[int'(waddr)] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
