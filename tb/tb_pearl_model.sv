// Behavioural model of an encapsulated IP ("pearl") for the wrapper
// testbenches. It is not part of the design.
//
// The model is a statically scheduled synchronous IP: it knows the same
// operation program as the synchronization processor and walks through it
// on its own clock. In the first cycle of an operation it reads the inputs
// the operation names (data_in of those ports) and folds them into an 8-bit
// accumulator; in each of the remaining run-1 cycles it scrambles the
// accumulator once. During the first cycle of an operation, data_out[j] is
// acc + j + 1, so every output word depends on every input word consumed
// before it and on the exact number of clock cycles the IP was given.
// Nothing here looks at the wrapper's handshakes: the IP only sees its
// (gated) clock.
module tb_pearl_model #(
  parameter int unsigned N_IN   = 3,
  parameter int unsigned N_OUT  = 2,
  parameter int unsigned DATA_W = 8,
  parameter int unsigned RUN_W  = 8,
  parameter int unsigned DEPTH  = 4,
  parameter int unsigned OP_W   = N_IN + N_OUT + RUN_W
) (
  input  logic                          ip_clk,
  input  logic                          rst,
  input  logic [OP_W-1:0]               prog [DEPTH],
  input  logic [N_IN-1:0][DATA_W-1:0]   data_in,
  output logic [N_OUT-1:0][DATA_W-1:0]  data_out,
  output int unsigned                   clocks
);

  int unsigned      k;      // operation index
  int unsigned      left;   // cycles of operation k still to run after the first
  logic [DATA_W-1:0] acc;

  function automatic logic [DATA_W-1:0] scramble(input logic [DATA_W-1:0] a);
    return DATA_W'((a << 1) ^ (a >> 3) ^ DATA_W'(8'h5b));
  endfunction

  always @(posedge ip_clk or posedge rst) begin
    if (rst) begin
      k <= 0; left <= 0; acc <= '0; clocks <= 0;
    end else begin
      clocks <= clocks + 1;
      if (left == 0) begin
        automatic logic [N_IN-1:0] im = prog[k][OP_W-1 -: N_IN];
        automatic int unsigned     rn = int'(prog[k][RUN_W-1:0]);
        automatic logic [DATA_W-1:0] a = acc + DATA_W'(k);
        for (int i = 0; i < N_IN; i++)
          if (im[i]) a = scramble(a) + data_in[i];
        acc  <= a;
        left <= (rn > 1) ? rn - 1 : 0;
        k    <= (k + 1) % DEPTH;
      end else begin
        acc  <= scramble(acc);
        left <= left - 1;
      end
    end
  end

  always_comb
    for (int j = 0; j < N_OUT; j++) data_out[j] = acc + DATA_W'(j + 1);

endmodule
