// Operations memory of the synchronization processor.
//
// Holds DEPTH operation words of OP_W bits. The read side is asynchronous:
// rdata follows raddr combinationally, so the SP sees the word of the address
// it presents in the same cycle. This is the paper's interface, two buses
// only (operation address and operation word).
//
// The paper uses an asynchronous ROM on ASICs and an SRAM on FPGAs. This
// module is the SRAM form: a synchronous write port (we, waddr, wdata) loads
// the program, typically while the SP is held in reset. A ROM is the same
// array with the write port tied off. The contents are not reset.
module sp_op_memory #(
  parameter int unsigned DEPTH  = 4,
  parameter int unsigned OP_W   = 13,
  parameter int unsigned ADDR_W = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic              clk,
  // program load port
  input  logic              we,
  input  logic [ADDR_W-1:0] waddr,
  input  logic [OP_W-1:0]   wdata,
  // asynchronous read port (operation address / operation word)
  input  logic [ADDR_W-1:0] raddr,
  output logic [OP_W-1:0]   rdata
);

  logic [OP_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign rdata = mem[raddr];

endmodule
