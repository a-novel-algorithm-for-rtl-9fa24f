// Self-checking testbench of sys_fsm with a small RAM (RAM_DEPTH = 40).
//
// The core, the window and the RAM are modelled here: a step counter that
// advances while run is high, random result pulses, and a one-clock-latency
// memory. Checked: the restart pulse, that run stays high for exactly
// text_len + lp + kth positions, that results go to consecutive addresses,
// that done waits for the core to be idle, that result_return streams
// every stored word in order under random out_ready back-pressure, and
// that a second elaboration producing more than 40 results stops writing
// at the RAM size and raises overflow.
//
// The two commands (elaborate, return results) are the paper's; the
// states, the handshake and the overflow checked are this design's own.
module tb_sys_fsm;
  localparam int RAM_DEPTH = 40;
  logic clk = 0, rst_n = 0, start_elab = 0, result_return = 0;
  logic [19:0] text_len = 20'd20;
  logic [3:0] lp = 4'd5;
  logic [2:0] kth = 3'd2;
  logic [31:0] steps = '0;
  logic core_idle = 1, core_valid = 0, out_ready = 0;
  logic [23:0] core_result = '0;
  logic run, restart, ram_we, out_valid, busy, done, overflow;
  logic [5:0] ram_waddr, ram_raddr;
  logic [23:0] ram_wdata, ram_rdata, out_data;
  logic [5:0] n_results;

  sys_fsm #(.RAM_DEPTH(RAM_DEPTH)) dut (.*);
  always #5 clk = ~clk;

  logic [23:0] ram [RAM_DEPTH];
  always_ff @(posedge clk) begin
    if (ram_we) ram[ram_waddr] <= ram_wdata;
    ram_rdata <= ram[ram_raddr];
  end

  int checks = 0, failures = 0, run_cycles = 0, restarts = 0;
  logic [23:0] sent [$];
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

  // core model: one position per 3 clocks while run, results at random
  int div = 0;
  int pending = 0;
  int tail_cfg = 0;
  bit gen_results = 1;
  always @(posedge clk) begin
    if (restart) begin steps <= '0; restarts++; end
    else if (run) begin
      run_cycles++;
      div <= (div + 1) % 3;
      if (div == 2) steps <= steps + 1;
    end
    core_valid  <= (run || pending > 0) && gen_results && ($urandom_range(0, 3) == 0);
    core_result <= 24'($urandom);
    if (core_valid && (dut.state == 1 || dut.state == 2) && sent.size() < RAM_DEPTH) sent.push_back(core_result);
    if (run) pending <= tail_cfg;
    else if (pending > 0) pending <= pending - 1;
    core_idle <= !run && pending == 0;
  end

  task automatic elaborate(int tail);
    @(negedge clk); start_elab = 1;
    tail_cfg = tail;
    restarts = 0;
    @(negedge clk); start_elab = 0;
    @(negedge clk);
    chk(restarts == 1 && busy, "restart pulse and busy");
    wait (!run && dut.state == 2);
    chk(steps == text_len + lp + kth, $sformatf("ran %0d positions", steps));
    chk(!done, "done while the core was still busy");
    wait (done);
    chk(pending == 0, "done before the core was idle");
  endtask

  initial begin
    int got;
    repeat (2) @(negedge clk);
    rst_n = 1;
    elaborate(6);
    chk(int'(n_results) == sent.size() && !overflow, $sformatf("stored %0d results, expected %0d", n_results, sent.size()));
    // return under back-pressure
    @(negedge clk); result_return = 1;
    @(negedge clk); result_return = 0;
    got = 0;
    while (!done || got == 0) begin
      @(negedge clk);
      out_ready = ($urandom_range(0, 2) != 0);
      if (out_valid && out_ready) begin
        chk(got < sent.size() && out_data == sent[got], $sformatf("returned word %0d", got));
        got++;
      end
      if (done && got > 0) break;
    end
    chk(got == sent.size(), $sformatf("returned %0d of %0d", got, sent.size()));
    // second run: more results than the RAM holds
    sent.delete();
    text_len = 20'd400;
    elaborate(0);
    chk(n_results == RAM_DEPTH && overflow, $sformatf("overflow: n=%0d overflow=%0d", n_results, overflow));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
