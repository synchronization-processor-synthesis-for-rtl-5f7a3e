// Processor-based synchronization wrapper (the "shell" of a patient process).
//
// Wraps a synchronous IP (the "pearl", outside this module) so that it
// tolerates any latency on its LIS channels. N_IN input ports and N_OUT
// output ports are small FIFOs (lis_port_fifo). The synchronization processor
// (sync_processor) runs a cyclic program held in the operations memory
// (sp_op_memory): for each operation it waits until the ports the operation
// names are ready, then pops those inputs, pushes those outputs and clocks
// the IP for the operation's run-cycle count. The IP's clock is the system
// clock gated by the SP's enable (sp_clock_gate).
//
// Interface:
//   in_valid/in_ready/in_data     one LIS input channel per input port
//   out_valid/out_ready/out_data  one LIS output channel per output port
//   ip_clk, ip_enable             gated clock for the IP, and the enable that
//                                 gates it (for an IP built with a clock
//                                 enable instead of a gated clock)
//   ip_data_in                    head word of each input FIFO, to the IP
//   ip_data_out                   words from the IP, written into the output
//                                 FIFOs in the cycles the SP pushes them
//   prog_we/prog_addr/prog_data   write port of the operations memory, to
//                                 load the program while rst is high
//   stall, sp_state               SP status
// Timing: in the cycle an operation fires the IP is clocked at the closing
// clock edge; at that edge it must take ip_data_in of the masked inputs, and
// ip_data_out of the masked outputs must be valid during that cycle.
//
// The block structure and the signals between the blocks follow the paper's
// wrapper figure. Port counts, widths, FIFO depth and the program load port
// are this design's choices; the defaults (5 ports, 4 operations, run counts
// up to 198) are sized for the paper's Viterbi decoder case.
module sp_shell
  import sp_pkg::*;
#(
  parameter int unsigned N_IN       = 3,
  parameter int unsigned N_OUT      = 2,
  parameter int unsigned DATA_W     = 8,
  parameter int unsigned FIFO_DEPTH = 2,
  parameter int unsigned RUN_W      = 8,
  parameter int unsigned DEPTH      = 4,
  parameter int unsigned ADDR_W     = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  parameter int unsigned OP_W       = N_IN + N_OUT + RUN_W
) (
  input  logic                          clk,
  input  logic                          rst,
  // LIS input channels
  input  logic [N_IN-1:0]               in_valid,
  output logic [N_IN-1:0]               in_ready,
  input  logic [N_IN-1:0][DATA_W-1:0]   in_data,
  // LIS output channels
  output logic [N_OUT-1:0]              out_valid,
  input  logic [N_OUT-1:0]              out_ready,
  output logic [N_OUT-1:0][DATA_W-1:0]  out_data,
  // IP side
  output logic                          ip_clk,
  output logic                          ip_enable,
  output logic [N_IN-1:0][DATA_W-1:0]   ip_data_in,
  input  logic [N_OUT-1:0][DATA_W-1:0]  ip_data_out,
  // program load
  input  logic                          prog_we,
  input  logic [ADDR_W-1:0]             prog_addr,
  input  logic [OP_W-1:0]               prog_data,
  // status
  output logic                          stall,
  output sp_state_t                     sp_state
);

  logic [N_IN-1:0]   in_not_empty, in_pop;
  logic [N_OUT-1:0]  out_not_full, out_push;
  logic [ADDR_W-1:0] op_addr;
  logic [OP_W-1:0]   op_word;

  for (genvar i = 0; i < N_IN; i++) begin : g_in_port
    lis_port_fifo #(.DATA_W(DATA_W), .DEPTH(FIFO_DEPTH)) u_in_port (
      .clk      (clk),
      .rst      (rst),
      .wr_valid (in_valid[i]),
      .wr_ready (in_ready[i]),
      .wr_data  (in_data[i]),
      .rd_valid (in_not_empty[i]),
      .rd_ready (in_pop[i]),
      .rd_data  (ip_data_in[i])
    );
  end

  for (genvar j = 0; j < N_OUT; j++) begin : g_out_port
    lis_port_fifo #(.DATA_W(DATA_W), .DEPTH(FIFO_DEPTH)) u_out_port (
      .clk      (clk),
      .rst      (rst),
      .wr_valid (out_push[j]),
      .wr_ready (out_not_full[j]),
      .wr_data  (ip_data_out[j]),
      .rd_valid (out_valid[j]),
      .rd_ready (out_ready[j]),
      .rd_data  (out_data[j])
    );
  end

  sp_op_memory #(.DEPTH(DEPTH), .OP_W(OP_W), .ADDR_W(ADDR_W)) u_op_mem (
    .clk   (clk),
    .we    (prog_we),
    .waddr (prog_addr),
    .wdata (prog_data),
    .raddr (op_addr),
    .rdata (op_word)
  );

  sync_processor #(
    .N_IN(N_IN), .N_OUT(N_OUT), .RUN_W(RUN_W), .DEPTH(DEPTH),
    .ADDR_W(ADDR_W), .OP_W(OP_W)
  ) u_sp (
    .clk          (clk),
    .rst          (rst),
    .op_addr      (op_addr),
    .op_word      (op_word),
    .in_not_empty (in_not_empty),
    .in_pop       (in_pop),
    .out_not_full (out_not_full),
    .out_push     (out_push),
    .enable       (ip_enable),
    .stall        (stall),
    .state        (sp_state)
  );

  sp_clock_gate u_cg (
    .clk  (clk),
    .en   (ip_enable),
    .gclk (ip_clk)
  );

endmodule
