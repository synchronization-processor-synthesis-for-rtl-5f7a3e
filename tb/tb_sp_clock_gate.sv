// Self-checking testbench of sp_clock_gate.
//
// For each clock cycle the testbench sets en to a random value during the
// low phase, then checks that the gated clock is high in the following high
// phase exactly when en was high, that toggling en in the middle of the high
// phase neither cuts the pulse short nor starts one (glitch freedom), and
// that gclk stays low during every low phase. At the end the number of
// gated-clock rising edges must equal the number of enabled cycles.
module tb_sp_clock_gate;

  logic clk = 1'b0;
  logic en;
  logic gclk;

  int checks = 0, failures = 0;
  int pulses = 0, expected = 0;

  sp_clock_gate dut (.clk, .en, .gclk);

  always #5 clk = ~clk;

  always @(posedge gclk) pulses++;

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
    en = 1'b0;
    for (int c = 0; c < 1000; c++) begin
      automatic bit en_now;
      @(negedge clk);
      #1 check(gclk == 1'b0, "gclk low while clk low");
      en_now = 1'($urandom);
      en = en_now;
      if (en_now) expected++;
      @(posedge clk);
      #1 check(gclk == en_now, "gclk level in high phase");
      en = ~en_now;
      #2 check(gclk == en_now, "pulse unaffected by en in high phase");
    end
    @(negedge clk);
    check(pulses == expected, "pulse count");
    $display("pulses=%0d expected=%0d", pulses, expected);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
