// Self-checking testbench of sp_op_memory.
//
// Writes a word, computed from its address, into every location through the
// load port, then reads every location back in random order. The read is
// asynchronous, so rdata is checked 1 ns after raddr changes, with no clock
// edge in between. Finally it overwrites one word and checks that only that
// location changed.
module tb_sp_op_memory;

  localparam int unsigned DEPTH  = 16;
  localparam int unsigned OP_W   = 13;
  localparam int unsigned ADDR_W = 4;

  logic              clk = 1'b0;
  logic              we;
  logic [ADDR_W-1:0] waddr, raddr;
  logic [OP_W-1:0]   wdata, rdata;

  int checks = 0, failures = 0;

  sp_op_memory #(.DEPTH(DEPTH), .OP_W(OP_W)) dut (
    .clk, .we, .waddr, .wdata, .raddr, .rdata
  );

  always #5 clk = ~clk;

  function automatic logic [OP_W-1:0] pattern(input int a, input int salt);
    return OP_W'((a * 977 + salt * 31 + 5) ^ (a << 7));
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; waddr = '0; wdata = '0; raddr = '0;
    @(negedge clk);
    for (int a = 0; a < DEPTH; a++) begin
      we = 1; waddr = ADDR_W'(a); wdata = pattern(a, 0);
      @(negedge clk);
    end
    we = 0;
    @(negedge clk);
    for (int k = 0; k < 200; k++) begin
      automatic int a = $urandom_range(0, DEPTH - 1);
      raddr = ADDR_W'(a);
      #1;
      check(rdata == pattern(a, 0), "read back");
      #1;
    end
    // overwrite location 5 only
    @(negedge clk);
    we = 1; waddr = 4'd5; wdata = pattern(5, 1);
    @(negedge clk);
    we = 0;
    for (int a = 0; a < DEPTH; a++) begin
      raddr = ADDR_W'(a);
      #1;
      check(rdata == pattern(a, (a == 5) ? 1 : 0), "after overwrite");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
