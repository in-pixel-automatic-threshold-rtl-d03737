// tb_hysteresis: calibration with discriminator hysteresis, and a manual
// threshold scan in both directions.
//
// Three calibration blocks at their default size calibrate identical front
// ends (baseline 172.3 codes, 0.6 codes noise) whose discriminators have a
// hysteresis of 0, 1.25 and 2.5 codes (0, 0.5 and 1 mV at 0.4 mV per code).
// Hysteresis must leave the baseline where it is (BL within one code in all
// three) and narrow the noise transition (NW with 1 mV below NW without).
// Then the block without hysteresis is used in bypass mode to measure the
// transfer curve point by point, upward from code 166 to 178 and downward
// back again: both directions must give the same counts within 5 % of the
// window, and the curve must fall from the full count to zero.
module tb_hysteresis;

  localparam int N = 32768;

  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #12.5 clk = ~clk;

  logic [2:0] por_n = 3'b111;
  logic       scan_start = 1'b0, bypass = 1'b0;
  logic [9:0] dac = '0;
  real        baseline = 172.3, sigma = 0.6;

  logic [9:0]  th[3], bl[3];
  logic [3:0]  nw[3];
  logic [15:0] acc[3];
  logic        d[3], done[3], err[3];
  real         hyst_codes[3] = '{0.0, 1.25, 2.5};

  for (genvar i = 0; i < 3; i++) begin : g_pix
    threshcal_top dut (
      .clk(clk), .por_n(por_n), .ext_rst_n(1'b1), .scan_start(scan_start),
      .bypass(i == 0 ? bypass : 1'b0), .dac(dac), .th_offset(6'd0), .disc_pulse(d[i]),
      .th(th[i]), .bl(bl[i]), .nw(nw[i]), .scan_done(done[i]), .acc(acc[i]), .seu_err(err[i]));
    disc_model u_fe (.th(th[i]), .baseline(baseline), .sigma(sigma), .hyst(hyst_codes[i]),
                     .disc(d[i]));
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic measure(input int code, output int result);
    int cycles;
    dac = 10'(code);
    @(negedge clk) scan_start = 1'b0;
    repeat (4) @(negedge clk);
    scan_start = 1'b1;
    cycles = 0;
    while (done[0] && cycles < 10) begin
      @(posedge clk);
      cycles++;
    end
    while (!done[0] && cycles < 40000) begin
      @(posedge clk);
      cycles++;
    end
    result = int'(acc[0]);
  endtask

  initial begin
    int up[13], down[13];
    #1 por_n = 3'b000;
    repeat (3) @(negedge clk);
    por_n = 3'b111;
    repeat (6) @(negedge clk);
    scan_start = 1'b1;
    repeat (10) @(negedge clk);
    wait (done[0] && done[1] && done[2]);
    @(negedge clk);
    for (int i = 0; i < 3; i++) begin
      $display("hysteresis %f codes: BL=%0d NW=%0d", hyst_codes[i], bl[i], nw[i]);
      check(real'(bl[i]) - baseline <= 1.0 && baseline - real'(bl[i]) <= 1.0,
            $sformatf("BL=%0d with hysteresis %f", bl[i], hyst_codes[i]));
    end
    check(nw[2] < nw[0], "1 mV hysteresis narrows the noise width");
    check(nw[2] != 0, "noise width still found with hysteresis");

    bypass = 1'b1;
    for (int k = 0; k <= 12; k++) measure(166 + k, up[k]);
    for (int k = 12; k >= 0; k--) measure(166 + k, down[k]);
    for (int k = 0; k <= 12; k++) begin
      $display("code %0d: up %0d down %0d", 166 + k, up[k], down[k]);
      check(up[k] - down[k] < N / 20 && down[k] - up[k] < N / 20,
            $sformatf("code %0d: both directions agree", 166 + k));
      if (k > 0) check(up[k] <= up[k-1] + N / 20, "curve does not rise");
    end
    check(up[0] == N && up[12] == 0, "curve runs from full to zero");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2500000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
