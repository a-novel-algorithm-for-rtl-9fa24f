// Result RAM: dumps the occurrences found during an elaboration so that
// they can be read back afterwards. Simple dual-port memory of DEPTH words
// of WIDTH bits; the default 43690 x 24 bits fills 1 Mbit with words of
// {16-bit index, 3-bit k, 5-bit length}. Writes take effect at the clock
// edge; reads are synchronous (rdata is valid one clock after raddr).
//
// The 1 Mbit size and the three fields come from the paper's test system;
// the field order, the depth of 43690 words and the ports are this
// design's choices.
module result_ram #(
  parameter int unsigned DEPTH = 43690,
  parameter int unsigned WIDTH = 24,
  localparam int unsigned A_W  = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [A_W-1:0]   waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [A_W-1:0]   raddr,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
