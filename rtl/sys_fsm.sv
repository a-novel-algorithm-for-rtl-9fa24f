// SYS FSM: coordinates the input and output of the test system.
//
//   IDLE/DONE --start_elab--> ELAB : restart pulse to the text source and the
//                                    window, result counter cleared; the core
//                                    runs (run = 1) until it has started
//                                    text_len + lp + kth text positions (the
//                                    positions past the text see only
//                                    padding and let pending occurrences
//                                    finish their validation)
//   ELAB  --> DRAIN                : run = 0, wait for the core to go idle
//   DRAIN --> DONE                 : done = 1, n_results words are in the RAM
//   DONE  --result_return--> RETURN: the RAM words 0 .. n_results-1 are sent
//                                    on out_data with a valid/ready handshake
//                                    (a word moves when out_valid and
//                                    out_ready are both high), then DONE.
// Every core result that arrives while ELAB/DRAIN is written to the next RAM
// address; results past RAM_DEPTH are dropped and set overflow. ram_wdata is
// the core's result word itself, passed straight to the RAM (it is the data
// path from the core to the RAM, so its bits follow an input by design).
//
// From the paper: the two commands (start the elaboration, return the
// results), storing each occurrence in the RAM during elaboration and
// dumping the RAM afterwards. This design's own choices: the states, the
// drain phase, the number of positions, the handshake and the overflow flag.
module sys_fsm #(
  parameter int unsigned RES_W     = 24,
  parameter int unsigned RAM_DEPTH = 43690,
  parameter int unsigned LEN_W     = 20,
  parameter int unsigned LP_W      = 4,
  parameter int unsigned K_W       = 3,
  localparam int unsigned A_W      = $clog2(RAM_DEPTH),
  localparam int unsigned N_W      = $clog2(RAM_DEPTH + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start_elab,
  input  logic             result_return,
  input  logic [LEN_W-1:0] text_len,
  input  logic [LP_W-1:0]  lp,
  input  logic [K_W-1:0]   kth,
  input  logic [31:0]      steps,
  input  logic             core_idle,
  input  logic             core_valid,
  input  logic [RES_W-1:0] core_result,
  output logic             run,
  output logic             restart,
  output logic             ram_we,
  output logic [A_W-1:0]   ram_waddr,
  output logic [RES_W-1:0] ram_wdata,
  output logic [A_W-1:0]   ram_raddr,
  input  logic [RES_W-1:0] ram_rdata,
  output logic [RES_W-1:0] out_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic             busy,
  output logic             done,
  output logic [N_W-1:0]   n_results,
  output logic             overflow
);
  typedef enum logic [2:0] {S_IDLE, S_ELAB, S_DRAIN, S_DONE, S_RET_ADDR, S_RET_WAIT, S_RET_OUT} state_t;
  state_t         state;
  logic [N_W-1:0] rd_ptr;
  logic [32:0]    n_pos;

  always_comb begin
    n_pos     = 33'(text_len) + 33'(lp) + 33'(kth);
    run       = (state == S_ELAB) && !restart && (33'(steps) < n_pos);
    ram_we    = core_valid && (state == S_ELAB || state == S_DRAIN) && (n_results < N_W'(RAM_DEPTH));
    ram_waddr = A_W'(n_results);
    ram_wdata = core_result;
    ram_raddr = A_W'(rd_ptr);
    out_valid = (state == S_RET_OUT);
    busy      = (state != S_IDLE) && (state != S_DONE);
    done      = (state == S_DONE);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      restart   <= 1'b0;
      n_results <= '0;
      overflow  <= 1'b0;
      rd_ptr    <= '0;
      out_data  <= '0;
    end else begin
      restart <= 1'b0;
      if (ram_we) n_results <= n_results + N_W'(1);
      if (core_valid && (state == S_ELAB || state == S_DRAIN) && !ram_we) overflow <= 1'b1;
      unique case (state)
        S_IDLE, S_DONE: begin
          if (start_elab) begin
            state     <= S_ELAB;
            restart   <= 1'b1;
            n_results <= '0;
            overflow  <= 1'b0;
          end else if (result_return && state == S_DONE) begin
            rd_ptr <= '0;
            state  <= (n_results == '0) ? S_DONE : S_RET_ADDR;
          end
        end
        S_ELAB:     if (!restart && 33'(steps) >= n_pos) state <= S_DRAIN;
        S_DRAIN:    if (core_idle) state <= S_DONE;
        S_RET_ADDR: state <= S_RET_WAIT;
        S_RET_WAIT: begin
          out_data <= ram_rdata;
          state    <= S_RET_OUT;
        end
        S_RET_OUT: if (out_ready) begin
          rd_ptr <= rd_ptr + N_W'(1);
          state  <= (rd_ptr + N_W'(1) == n_results) ? S_DONE : S_RET_ADDR;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_no_write_outside_elab: assert property (@(posedge clk) disable iff (!rst_n)
    ram_we |-> (state == S_ELAB || state == S_DRAIN));
endmodule
