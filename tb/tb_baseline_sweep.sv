// tb_baseline_sweep: continuous equivalent-baseline scan.
//
// Repeats the calibration for model baselines from 100 to 500 DAC codes.
// Successive points are 1.25 codes apart, so the fractional part of the
// baseline cycles through .00, .25, .50 and .75 while the whole range is
// covered in 321 calibrations. The window is shortened to 2^11 samples and
// the step to 2200 cycles so that the sweep simulates in about a minute;
// the algorithm is unchanged. For every point the scan error, found BL
// minus model baseline, must lie within one code; the testbench also
// reports the largest error and the mean absolute error.
module tb_baseline_sweep;

  localparam int unsigned CNT  = 11;
  localparam int unsigned STEP = 2200;

  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #12.5 clk = ~clk;

  logic [2:0] por_n = 3'b111;
  logic       ext_rst_n = 1'b1;
  logic       scan_start = 1'b0;
  logic [9:0] th, bl;
  logic [3:0] nw;
  logic       disc, scan_done, seu_err;
  logic [CNT:0] acc;
  real        baseline = 100.0, sigma = 0.6;

  threshcal_top #(.CNT_BITS(CNT), .STEP_CYCLES(STEP), .SETTLE_CYCLES(100)) dut (
    .clk(clk), .por_n(por_n), .ext_rst_n(ext_rst_n), .scan_start(scan_start),
    .bypass(1'b0), .dac(10'd0), .th_offset(6'd0), .disc_pulse(disc),
    .th(th), .bl(bl), .nw(nw), .scan_done(scan_done), .acc(acc), .seu_err(seu_err));

  disc_model u_fe (.th(th), .baseline(baseline), .sigma(sigma), .hyst(0.0), .disc(disc));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    real err, max_err, sum_err;
    int  points, cycles;
    max_err = 0.0;
    sum_err = 0.0;
    points  = 0;
    #1 por_n = 3'b000;
    repeat (3) @(negedge clk);
    por_n = 3'b111;
    repeat (6) @(negedge clk);
    for (int k = 0; k <= 320; k++) begin
      baseline   = 100.0 + 1.25 * real'(k);
      scan_start = 1'b1;
      cycles = 0;
      while (scan_done && cycles < 10) begin
        @(posedge clk);
        cycles++;
      end
      while (!scan_done && cycles < 40 * STEP) begin
        @(posedge clk);
        cycles++;
      end
      err = real'(bl) - baseline;
      check(scan_done && err <= 1.0 && err >= -1.0,
            $sformatf("model %f: BL=%0d error %f", baseline, bl, err));
      if (err < 0.0) err = -err;
      if (err > max_err) max_err = err;
      sum_err += err;
      points++;
      @(negedge clk) scan_start = 1'b0;
      repeat (5) @(negedge clk);
    end
    $display("sweep: %0d points, max |error| %f, mean |error| %f codes",
             points, max_err, sum_err / real'(points));
    check(sum_err / real'(points) <= 0.5, "mean error within half a code");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (330 * 36 * STEP) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
