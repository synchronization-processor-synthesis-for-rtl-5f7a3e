// Synchronization processor (SP).
//
// The SP decides, cycle by cycle, whether the encapsulated IP may be clocked.
// It executes, cyclically, a program of operations held in an external
// asynchronous memory. Each operation word is the concatenation
//     { input_mask[N_IN-1:0], output_mask[N_OUT-1:0], run[RUN_W-1:0] }
// (input mask in the most significant bits). The masks name the ports the
// operation is sensitive to; run is the number of IP clock cycles from this
// synchronization point to the next one.
//
// Controller (three states, as in the paper):
//   SP_RESET  entered while rst is high; clears the read counter.
//   SP_READ   the word at op_addr is tested. The operation fires when every
//             masked input port is not empty and every masked output port is
//             not full. In the firing cycle enable is high, each masked input
//             gets pop and each masked output gets push (Mealy outputs, no
//             cycle of latency), and the read counter advances modulo DEPTH.
//             If run > 1 the SP moves to SP_RUN for the remaining run-1
//             cycles, else it stays in SP_READ and tests the next operation
//             in the very next cycle. While the test fails, enable is low
//             (stall is high) and nothing is popped or pushed.
//   SP_RUN    enable is high and no port is tested, for run-1 cycles; then
//             back to SP_READ.
// So with all ports ready an operation costs max(run,1) cycles and the IP
// runs without a single lost cycle.
//
// Interface: op_addr/op_word are the two buses to the operations memory;
// in_not_empty/in_pop and out_not_full/out_push go to the port FIFOs;
// enable goes to the clock gate. stall and state are status outputs.
//
// Follows the paper: the three states, the operation format and its field
// order, the modulo read counter, the two-bus memory interface. This
// design's choices: the port test, pop/push and the first IP cycle share the
// firing cycle; run = 0 is treated as run = 1; a synchronous active-high
// reset; the read counter starts at address 0.
module sync_processor
  import sp_pkg::*;
#(
  parameter int unsigned N_IN   = 3,
  parameter int unsigned N_OUT  = 2,
  parameter int unsigned RUN_W  = 8,
  parameter int unsigned DEPTH  = 4,
  parameter int unsigned ADDR_W = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  parameter int unsigned OP_W   = N_IN + N_OUT + RUN_W
) (
  input  logic              clk,
  input  logic              rst,
  // operations memory
  output logic [ADDR_W-1:0] op_addr,
  input  logic [OP_W-1:0]   op_word,
  // input ports
  input  logic [N_IN-1:0]   in_not_empty,
  output logic [N_IN-1:0]   in_pop,
  // output ports
  input  logic [N_OUT-1:0]  out_not_full,
  output logic [N_OUT-1:0]  out_push,
  // IP clock enable
  output logic              enable,
  // status
  output logic              stall,
  output sp_state_t         state
);

  logic [N_IN-1:0]  imask;
  logic [N_OUT-1:0] omask;
  logic [RUN_W-1:0] run;
  logic [RUN_W-1:0] run_cnt;   // cycles still to run in SP_RUN
  logic             fire;

  assign {imask, omask, run} = op_word;

  // An operation fires when all the ports it names are ready.
  assign fire = (state == SP_READ) &&
                (&(in_not_empty | ~imask)) &&
                (&(out_not_full | ~omask));

  always_comb begin
    enable   = fire || (state == SP_RUN);
    in_pop   = fire ? imask : '0;
    out_push = fire ? omask : '0;
    stall    = (state == SP_READ) && !fire;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state   <= SP_RESET;
      op_addr <= '0;
      run_cnt <= '0;
    end else begin
      unique case (state)
        SP_RESET: begin
          state   <= SP_READ;
          op_addr <= '0;
        end
        SP_READ: begin
          if (fire) begin
            op_addr <= (op_addr == ADDR_W'(DEPTH - 1)) ? '0 : op_addr + 1'b1;
            if (run > RUN_W'(1)) begin
              run_cnt <= run - 1'b1;
              state   <= SP_RUN;
            end
          end
        end
        SP_RUN: begin
          run_cnt <= run_cnt - 1'b1;
          if (run_cnt == RUN_W'(1)) state <= SP_READ;
        end
        default: state <= SP_RESET;
      endcase
    end
  end

  // A port is only handshaken when it is ready.
  a_pop_ready:  assert property (@(posedge clk) disable iff (rst)
                                 (in_pop & ~in_not_empty) == '0);
  a_push_ready: assert property (@(posedge clk) disable iff (rst)
                                 (out_push & ~out_not_full) == '0);
  a_run_cnt:    assert property (@(posedge clk) disable iff (rst)
                                 state == SP_RUN |-> run_cnt != '0);

endmodule
