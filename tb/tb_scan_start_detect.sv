// tb_scan_start_detect: self-checking testbench of the ScanStart edge
// detector.
//
// Raises and lowers scan_start at random times and with random lengths and
// checks that every rising edge gives exactly one start pulse of one cycle,
// three or four edges after the change, that falling edges and a steady
// level give none, and that a ScanStart held high across a reset gives no
// pulse when reset is released.
module tb_scan_start_detect;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b1, scan_start = 1'b0, start, seu_err;
  initial #1 rst_n = 1'b0;
  always #12.5 clk = ~clk;

  scan_start_detect dut (.clk(clk), .rst_n(rst_n), .scan_start(scan_start), .start(start),
                         .seu_err(seu_err));

  int pulses = 0;
  always @(posedge clk) #1 if (start) pulses++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    int p0, lat;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    repeat (6) @(negedge clk);
    for (int i = 0; i < 40; i++) begin
      // rise at a random point in the period
      p0 = pulses;
      repeat ($urandom() % 25) #1;
      scan_start = 1'b1;
      lat = 0;
      while (!start && lat < 10) begin
        @(posedge clk) #1;
        lat++;
      end
      check(lat >= 3 && lat <= 4, $sformatf("pulse %0d edges after the rise", lat));
      @(posedge clk) #1 check(!start, "pulse lasts one cycle");
      repeat ($urandom() % 20) @(posedge clk);
      #1 check(pulses == p0 + 1, "one pulse per rising edge");
      scan_start = 1'b0;
      repeat (5 + $urandom() % 10) @(posedge clk);
      #1 check(pulses == p0 + 1, "no pulse on the falling edge");
    end
    // high across a reset
    p0 = pulses;
    scan_start = 1'b1;
    repeat (10) @(negedge clk);
    check(pulses == p0 + 1, "edge before reset seen");
    rst_n = 1'b0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    repeat (10) @(negedge clk);
    check(pulses == p0 + 1, "no pulse when reset ends with ScanStart high");
    scan_start = 1'b0;
    repeat (5) @(negedge clk);
    scan_start = 1'b1;
    repeat (6) @(negedge clk);
    check(pulses == p0 + 2, "next real rising edge seen");
    check(!seu_err, "no TMR mismatch");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
