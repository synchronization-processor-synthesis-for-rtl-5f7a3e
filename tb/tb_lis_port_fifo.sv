// Self-checking testbench of lis_port_fifo.
//
// Random valid on the write side and random ready on the read side, over a
// few thousand cycles; a queue in the testbench is the reference. Every cycle
// it checks rd_valid (not empty), wr_ready (not full) and, on every read,
// the word read. It also checks that the FIFO fills to exactly DEPTH words
// and that a write and a read can happen in the same cycle.
module tb_lis_port_fifo;

  localparam int unsigned DATA_W = 8;
  localparam int unsigned DEPTH  = 3;

  logic              clk = 1'b0;
  logic              rst;
  logic              wr_valid, wr_ready, rd_valid, rd_ready;
  logic [DATA_W-1:0] wr_data, rd_data;

  int checks = 0, failures = 0;
  int n_full = 0, n_both = 0, n_reads = 0;
  logic [DATA_W-1:0] model [$];

  lis_port_fifo #(.DATA_W(DATA_W), .DEPTH(DEPTH)) dut (
    .clk, .rst, .wr_valid, .wr_ready, .wr_data, .rd_valid, .rd_ready, .rd_data
  );

  always #5 clk = ~clk;

  initial begin
    #500000;
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

  initial begin
    rst = 1'b1; wr_valid = 0; rd_ready = 0; wr_data = '0;
    repeat (3) @(negedge clk);
    rst = 1'b0;
    for (int c = 0; c < 4000; c++) begin
      // vary the balance so that the FIFO runs both full and empty
      automatic int wp = ((c / 500) % 2 != 0) ? 80 : 30;
      wr_valid = ($urandom_range(0, 99) < wp);
      rd_ready = ($urandom_range(0, 99) < 100 - wp);
      wr_data  = DATA_W'($urandom);
      #1;
      check(rd_valid == (model.size() != 0), "not empty");
      check(wr_ready == (model.size() != DEPTH), "not full");
      if (model.size() == DEPTH) n_full++;
      if (rd_valid && rd_ready) begin
        check(rd_data == model[0], "read data");
        n_reads++;
      end
      if (wr_valid && wr_ready && rd_valid && rd_ready) n_both++;
      // rising edge
      if (rd_valid && rd_ready) void'(model.pop_front());
      if (wr_valid && wr_ready) model.push_back(wr_data);
      @(negedge clk);
    end
    check(n_full > 0, "FIFO was full");
    check(n_both > 0, "simultaneous read and write");
    check(n_reads > 1000, "enough reads");
    $display("reads=%0d full_cycles=%0d both=%0d", n_reads, n_full, n_both);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
