// End-to-end testbench of the wrapper sp_shell, at its default parameters
// (3 input ports, 2 output ports, 8-bit data, 2-word port FIFOs, a 4-operation
// program with run counts that add up to 198 IP cycles per pass).
//
// A behavioural IP (tb_pearl_model), clocked by the wrapper's gated clock,
// runs the same schedule as the program. Input words are random; producers
// and consumers on the LIS channels assert valid/ready at random, with
// probabilities that change every few program passes. Because the wrapper
// must make the IP insensitive to channel latency, the output streams must
// equal those of a reference model that executes the schedule with no
// timing at all; every output word is compared with it.
//
// Also checked: during the first passes, with every channel always ready,
// each program pass takes exactly 198 cycles (no cycle lost between
// operations); the IP receives exactly as many clock edges as the cycles in
// which enable was high. Each mechanism of the wrapper is counted and must
// occur at least once: stall on an empty input, stall on a full output,
// free-run cycles, back-to-back operations, wrap of the read counter, an
// unmasked non-empty input left alone, back-pressure on an input channel,
// a held output channel.
module tb_sp_shell;
  import sp_pkg::*;

  // the defaults of sp_shell
  localparam int unsigned N_IN   = 3;
  localparam int unsigned N_OUT  = 2;
  localparam int unsigned DATA_W = 8;
  localparam int unsigned RUN_W  = 8;
  localparam int unsigned DEPTH  = 4;
  localparam int unsigned ADDR_W = 2;
  localparam int unsigned OP_W   = N_IN + N_OUT + RUN_W;
  localparam int unsigned FIFO_DEPTH = 2;
  localparam int unsigned PASSES = 40;
  localparam int unsigned FAST_PASSES = 6;

  logic                          clk = 1'b0;
  logic                          rst;
  logic [N_IN-1:0]               in_valid, in_ready;
  logic [N_IN-1:0][DATA_W-1:0]   in_data;
  logic [N_OUT-1:0]              out_valid, out_ready;
  logic [N_OUT-1:0][DATA_W-1:0]  out_data;
  logic                          ip_clk, ip_enable;
  logic [N_IN-1:0][DATA_W-1:0]   ip_data_in;
  logic [N_OUT-1:0][DATA_W-1:0]  ip_data_out;
  logic                          prog_we;
  logic [ADDR_W-1:0]             prog_addr;
  logic [OP_W-1:0]               prog_data;
  logic                          stall;
  sp_state_t                     sp_state;
  int unsigned                   ip_clocks;

  // The program: {input mask, output mask, run}; runs add up to 198.
  logic [OP_W-1:0] prog [DEPTH];
  task automatic make_program();
    prog[0] = {3'b011, 2'b00, 8'd1};
    prog[1] = {3'b100, 2'b01, 8'd146};
    prog[2] = {3'b000, 2'b10, 8'd3};
    prog[3] = {3'b101, 2'b11, 8'd48};
  endtask

  sp_shell dut (
    .clk, .rst, .in_valid, .in_ready, .in_data, .out_valid, .out_ready,
    .out_data, .ip_clk, .ip_enable, .ip_data_in, .ip_data_out, .prog_we,
    .prog_addr, .prog_data, .stall, .sp_state
  );

  tb_pearl_model #(.N_IN(N_IN), .N_OUT(N_OUT), .DATA_W(DATA_W), .RUN_W(RUN_W),
                   .DEPTH(DEPTH)) pearl (
    .ip_clk, .rst, .prog, .data_in(ip_data_in), .data_out(ip_data_out),
    .clocks(ip_clocks)
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- reference model: the schedule executed with no timing ----
  logic [DATA_W-1:0] in_stream  [N_IN][$];
  logic [DATA_W-1:0] exp_stream [N_OUT][$];

  function automatic logic [DATA_W-1:0] scramble(input logic [DATA_W-1:0] a);
    return DATA_W'((a << 1) ^ (a >> 3) ^ DATA_W'(8'h5b));
  endfunction

  task automatic build_reference();
    logic [DATA_W-1:0] acc = '0;
    int unsigned       idx [N_IN];
    for (int i = 0; i < N_IN; i++) idx[i] = 0;
    for (int p = 0; p < PASSES; p++)
      for (int k = 0; k < DEPTH; k++) begin
        logic [N_IN-1:0]  im = prog[k][OP_W-1 -: N_IN];
        logic [N_OUT-1:0] om = prog[k][RUN_W +: N_OUT];
        int unsigned      rn = int'(prog[k][RUN_W-1:0]);
        logic [DATA_W-1:0] a;
        for (int j = 0; j < N_OUT; j++)
          if (om[j]) exp_stream[j].push_back(acc + DATA_W'(j + 1));
        a = acc + DATA_W'(k);
        for (int i = 0; i < N_IN; i++)
          if (im[i]) begin
            logic [DATA_W-1:0] w = DATA_W'($urandom);
            in_stream[i].push_back(w);
            a = scramble(a) + w;
          end
        acc = a;
        for (int r = 1; r < ((rn > 1) ? rn : 1); r++) acc = scramble(acc);
      end
  endtask

  // ---- mechanism counters ----
  int n_stall_in = 0, n_stall_out = 0, n_free_run = 0, n_back_to_back = 0;
  int n_wrap = 0, n_ignored = 0, n_in_stop = 0, n_out_hold = 0;
  int n_enabled = 0;

  initial begin
    int unsigned sent [N_IN];
    int unsigned rcvd [N_OUT];
    int unsigned pass_start [$];
    automatic int unsigned cycle = 0;
    automatic int unsigned p_in = 100, p_out = 100;
    automatic int unsigned total_out = 0, got_out = 0;
    automatic int unsigned pass_cycles = 0;
    automatic bit          fire_prev = 0;
    automatic int unsigned k = 0;
    int unsigned in_fill [N_IN];
    int unsigned out_fill [N_OUT];
    logic [N_IN-1:0]  im_k, ne;
    logic [N_OUT-1:0] om_k, nf;

    make_program();
    build_reference();
    for (int a = 0; a < DEPTH; a++)
      pass_cycles += (prog[a][RUN_W-1:0] > 1) ? int'(prog[a][RUN_W-1:0]) : 1;
    check(pass_cycles == 198, "program length");
    for (int i = 0; i < N_IN; i++) begin
      sent[i] = 0;
      in_fill[i] = 0;
    end
    for (int j = 0; j < N_OUT; j++) begin
      rcvd[j] = 0;
      out_fill[j] = 0;
      total_out += exp_stream[j].size();
    end

    // reset, and load the program through the memory's write port
    rst = 1'b1; in_valid = '0; in_data = '0; out_ready = '0;
    prog_we = 1'b0; prog_addr = '0; prog_data = '0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      prog_we = 1'b1; prog_addr = ADDR_W'(a); prog_data = prog[a];
    end
    @(negedge clk);
    prog_we = 1'b0;
    @(negedge clk);
    rst = 1'b0;

    while (got_out < total_out) begin
      bit fire;
      // channel behaviour for this cycle
      if (pass_start.size() >= FAST_PASSES) begin
        p_in  = ((pass_start.size() / 4) % 3 == 0) ? 2 : ((pass_start.size() / 4) % 3 == 1) ? 100 : 20;
        p_out = ((pass_start.size() / 3) % 3 == 0) ? 1 : ((pass_start.size() / 3) % 3 == 1) ? 60 : 100;
      end
      for (int i = 0; i < N_IN; i++) begin
        in_valid[i] = (sent[i] < in_stream[i].size()) && ($urandom_range(0, 99) < p_in);
        in_data[i]  = in_valid[i] ? in_stream[i][sent[i]] : DATA_W'($urandom);
      end
      for (int j = 0; j < N_OUT; j++) out_ready[j] = ($urandom_range(0, 99) < p_out);
      #1;
      // what happens at the coming rising edge; the testbench keeps its own
      // operation index and FIFO fill levels, from the handshakes it sees
      im_k = prog[k][OP_W-1 -: N_IN];
      om_k = prog[k][RUN_W +: N_OUT];
      for (int i = 0; i < N_IN; i++) ne[i] = (in_fill[i] != 0);
      for (int j = 0; j < N_OUT; j++) nf[j] = (out_fill[j] != FIFO_DEPTH);
      fire = (sp_state == SP_READ) && !stall;
      check(stall == ((sp_state == SP_READ) && !(((ne & im_k) == im_k) && ((nf & om_k) == om_k))), "stall");
      if (fire && k == 0) pass_start.push_back(cycle);
      if (fire && k == DEPTH - 1) n_wrap++;
      if (fire && fire_prev) n_back_to_back++;
      if (stall && (im_k & ~ne) != '0) n_stall_in++;
      if (stall && (om_k & ~nf) != '0) n_stall_out++;
      if (sp_state == SP_RUN) n_free_run++;
      if (fire && (ne & ~im_k) != '0) n_ignored++;
      if (ip_enable) n_enabled++;
      check(ip_enable == (fire || sp_state == SP_RUN), "enable");
      for (int i = 0; i < N_IN; i++) begin
        check(in_ready[i] == (in_fill[i] != FIFO_DEPTH), "input not full");
        if (in_valid[i] && !in_ready[i]) n_in_stop++;
        if (in_valid[i] && in_ready[i]) begin
          sent[i]++;
          in_fill[i]++;
        end
        if (fire && im_k[i]) in_fill[i]--;
      end
      for (int j = 0; j < N_OUT; j++) begin
        check(out_valid[j] == (out_fill[j] != 0), "output not empty");
        if (out_valid[j] && !out_ready[j]) n_out_hold++;
        if (out_valid[j] && out_ready[j]) begin
          out_fill[j]--;
          if (rcvd[j] < exp_stream[j].size()) begin
            check(out_data[j] == exp_stream[j][rcvd[j]], $sformatf("output %0d word %0d", j, rcvd[j]));
            rcvd[j]++;
            got_out++;
          end
        end
        if (fire && om_k[j]) out_fill[j]++;
      end
      if (fire) k = (k + 1) % DEPTH;
      fire_prev = fire;
      cycle++;
      @(negedge clk);
    end

    // the always-ready passes take exactly the sum of the run counts
    for (int p = 1; p < FAST_PASSES - 1; p++)
      check(pass_start[p+1] - pass_start[p] == pass_cycles, $sformatf("pass %0d length %0d", p, pass_start[p+1] - pass_start[p]));
    check(ip_clocks == n_enabled, "IP clock edges equal enabled cycles");
    check(pass_start.size() >= PASSES, "all passes started");
    check(total_out > 0, "output words expected");

    check(n_stall_in > 0,     "stall on empty input happened");
    check(n_stall_out > 0,    "stall on full output happened");
    check(n_free_run > 0,     "free run happened");
    check(n_back_to_back > 0, "back-to-back operations happened");
    check(n_wrap > 0,         "read counter wrap happened");
    check(n_ignored > 0,      "unmasked input left alone happened");
    check(n_in_stop > 0,      "input back-pressure happened");
    check(n_out_hold > 0,     "output held happened");
    $display("cycles=%0d passes=%0d ip_clocks=%0d stall_in=%0d stall_out=%0d free_run=%0d back_to_back=%0d wrap=%0d ignored=%0d in_stop=%0d out_hold=%0d",
             cycle, pass_start.size(), ip_clocks, n_stall_in, n_stall_out, n_free_run,
             n_back_to_back, n_wrap, n_ignored, n_in_stop, n_out_hold);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
