// tb_clock_gate: self-checking testbench of the latch-based clock gate.
//
// Drives a random enable that changes just after each rising clock edge
// (as a flip-flop output does) and checks, for every clock period, that the
// gated clock has a full-width high pulse exactly when the enable was high
// before the rising edge, and stays low otherwise. A glitch on the enable
// while the clock is high must not reach the gated clock.
module tb_clock_gate;

  int checks = 0, failures = 0;
  logic clk = 1'b0, en = 1'b0, gclk;
  int   pulses = 0, gated = 0;

  clock_gate dut (.clk(clk), .en(en), .gclk(gclk));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    bit e;
    for (int i = 0; i < 400; i++) begin
      #2 en = 1'($urandom());
      e = en;
      #10.5 clk = 1'b1;  // rising edge at 12.5 ns into the period
      #1 check(gclk == e, $sformatf("period %0d gclk=%0b expected %0b", i, gclk, e));
      if (e) pulses++; else gated++;
      // enable glitch while the clock is high
      #3 en = ~en;
      #1 check(gclk == e, "enable glitch does not reach gclk");
      #1 en = ~en;
      #3 check(gclk == e, "gclk steady while clk high");
      #3.5 clk = 1'b0;
      #1 check(gclk == 1'b0, "gclk low while clk low");
      #1;
    end
    check(pulses > 0 && gated > 0, "both enabled and gated periods");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100us;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
