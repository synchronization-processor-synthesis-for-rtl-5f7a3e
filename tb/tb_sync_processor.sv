// Self-checking testbench of sync_processor.
//
// The operations memory is modelled here as an array read combinationally at
// op_addr. Each phase loads a random program (random masks, run counts 0..6)
// while the SP is in reset, then drives random not-empty / not-full flags
// and compares, every cycle, enable, pop, push, stall and op_addr with a
// reference model that keeps its own read address and free-run count. A
// last phase holds every port ready and checks that one pass through the
// program takes exactly sum(max(run,1)) cycles, i.e. that the SP loses no
// cycle between operations.
module tb_sync_processor;
  import sp_pkg::*;

  localparam int unsigned N_IN   = 3;
  localparam int unsigned N_OUT  = 2;
  localparam int unsigned RUN_W  = 8;
  localparam int unsigned DEPTH  = 4;
  localparam int unsigned ADDR_W = 2;
  localparam int unsigned OP_W   = N_IN + N_OUT + RUN_W;

  logic              clk = 1'b0;
  logic              rst;
  logic [ADDR_W-1:0] op_addr;
  logic [OP_W-1:0]   op_word;
  logic [N_IN-1:0]   in_not_empty, in_pop;
  logic [N_OUT-1:0]  out_not_full, out_push;
  logic              enable, stall;
  sp_state_t         state;

  logic [OP_W-1:0]   prog [DEPTH];

  int checks = 0, failures = 0;

  sync_processor #(.N_IN(N_IN), .N_OUT(N_OUT), .RUN_W(RUN_W), .DEPTH(DEPTH)) dut (
    .clk, .rst, .op_addr, .op_word, .in_not_empty, .in_pop,
    .out_not_full, .out_push, .enable, .stall, .state
  );

  assign op_word = prog[op_addr];

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // reference model state
  int unsigned ref_addr;
  int unsigned ref_left;     // free-run cycles still to come
  bit          ref_started;  // left the reset state

  task automatic load_random_program();
    for (int a = 0; a < DEPTH; a++) begin
      logic [N_IN-1:0]  im = N_IN'($urandom);
      logic [N_OUT-1:0] om = N_OUT'($urandom);
      logic [RUN_W-1:0] rn = RUN_W'($urandom_range(0, 6));
      prog[a] = {im, om, rn};
    end
  endtask

  task automatic do_reset();
    rst = 1'b1;
    in_not_empty = '0;
    out_not_full = '0;
    repeat (3) @(negedge clk);
    rst = 1'b0;
    ref_addr = 0; ref_left = 0; ref_started = 0;
  endtask

  // One cycle: inputs are set at the falling edge, outputs compared, then the
  // model takes the rising edge.
  task automatic step(input logic [N_IN-1:0] ne, input logic [N_OUT-1:0] nf);
    logic [N_IN-1:0]  im;
    logic [N_OUT-1:0] om;
    int unsigned      rn;
    bit               rdy, e_en;
    logic [N_IN-1:0]  e_pop;
    logic [N_OUT-1:0] e_push;
    in_not_empty = ne;
    out_not_full = nf;
    #1;
    {im, om} = prog[ref_addr][OP_W-1:RUN_W];
    rn       = int'(prog[ref_addr][RUN_W-1:0]);
    rdy = ((ne & im) == im) && ((nf & om) == om);
    if (!ref_started) begin
      e_en = 0; e_pop = '0; e_push = '0;
    end else if (ref_left > 0) begin
      e_en = 1; e_pop = '0; e_push = '0;
    end else begin
      e_en = rdy; e_pop = rdy ? im : '0; e_push = rdy ? om : '0;
    end
    check(op_addr == ADDR_W'(ref_addr), "op_addr");
    check(enable == e_en, "enable");
    check(in_pop == e_pop, "pop");
    check(out_push == e_push, "push");
    check(stall == (ref_started && ref_left == 0 && !rdy), "stall");
    // model of the rising edge
    if (!ref_started) ref_started = 1;
    else if (ref_left > 0) ref_left--;
    else if (rdy) begin
      ref_addr = (ref_addr + 1) % DEPTH;
      ref_left = (rn > 1) ? rn - 1 : 0;
    end
    @(negedge clk);
  endtask

  initial begin
    rst = 1'b1;
    in_not_empty = '0;
    out_not_full = '0;
    @(negedge clk);
    for (int phase = 0; phase < 8; phase++) begin
      load_random_program();
      do_reset();
      for (int c = 0; c < 400; c++) begin
        // bias towards ready so that operations fire often
        automatic logic [N_IN-1:0]  ne = N_IN'($urandom) | N_IN'($urandom);
        automatic logic [N_OUT-1:0] nf = N_OUT'($urandom) | N_OUT'($urandom);
        step(ne, nf);
      end
    end

    // Throughput: all ports ready, count the cycles of one program pass.
    begin
      automatic int unsigned expect_cycles = 0, cycles = 0, en_cycles = 0;
      load_random_program();
      for (int a = 0; a < DEPTH; a++) begin
        automatic int unsigned rn = int'(prog[a][RUN_W-1:0]);
        expect_cycles += (rn > 1) ? rn : 1;
      end
      do_reset();
      step('1, '1);          // the reset state
      // now at address 0 in the read state
      do begin
        if (enable) en_cycles++;
        step('1, '1);
        cycles++;
      end while (!(op_addr == '0 && ref_left == 0));
      check(cycles == expect_cycles, "pass length");
      check(en_cycles == expect_cycles, "IP enabled every cycle");
      $display("pass of %0d cycles, expected %0d", cycles, expect_cycles);
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
