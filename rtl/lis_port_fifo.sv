// LIS port FIFO, used for both the input ports and the output ports of the
// wrapper.
//
// A DEPTH-entry first-in first-out buffer with a valid/ready handshake on
// each side. On the LIS channel side of an input port, wr_valid/wr_ready are
// the channel's ctrl pair (not-void in, not-stop out); on the wrapper side
// rd_valid is "not empty" and rd_ready is "pop" from the synchronization
// processor. An output port is the same FIFO the other way round: wr_valid is
// "push", wr_ready is "not full", and rd_valid/rd_ready are the outgoing
// channel's ctrl pair. A write happens on a clock edge when wr_valid &&
// wr_ready, a read when rd_valid && rd_ready; both may happen in the same
// cycle. rd_data is the head entry, read combinationally. wr_ready depends
// only on the fill level, so a full FIFO does not accept a word in the cycle
// it is read.
//
// The paper names the ports and their FIFO-like signals (not empty, pop,
// push, not full) and draws each port with a register; the depth, the
// valid/ready form of the external ctrl and the circular-buffer insides are
// this design's choices.
module lis_port_fifo #(
  parameter int unsigned DATA_W = 8,
  parameter int unsigned DEPTH  = 2
) (
  input  logic              clk,
  input  logic              rst,
  // write side
  input  logic              wr_valid,
  output logic              wr_ready,
  input  logic [DATA_W-1:0] wr_data,
  // read side
  output logic              rd_valid,
  input  logic              rd_ready,
  output logic [DATA_W-1:0] rd_data
);

  localparam int unsigned PTR_W = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [DATA_W-1:0]  buf_q [DEPTH];
  logic [PTR_W-1:0]   wptr, rptr;
  logic [PTR_W:0]     count;
  logic               do_wr, do_rd;

  assign wr_ready = (count != (PTR_W+1)'(DEPTH));
  assign rd_valid = (count != '0);
  assign rd_data  = buf_q[rptr];
  assign do_wr    = wr_valid && wr_ready;
  assign do_rd    = rd_valid && rd_ready;

  function automatic logic [PTR_W-1:0] next_ptr(input logic [PTR_W-1:0] p);
    return (p == PTR_W'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (do_wr) wptr <= next_ptr(wptr);
      if (do_rd) rptr <= next_ptr(rptr);
      count <= count + (PTR_W+1)'(do_wr) - (PTR_W+1)'(do_rd);
    end
  end

  always_ff @(posedge clk) begin
    if (do_wr) buf_q[wptr] <= wr_data;
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (rst)
                                  count <= (PTR_W+1)'(DEPTH));
  // A word offered on the read side stays offered, unchanged, until taken.
  a_rd_hold:     assert property (@(posedge clk) disable iff (rst)
                                  rd_valid && !rd_ready |=> rd_valid && $stable(rd_data));

endmodule
