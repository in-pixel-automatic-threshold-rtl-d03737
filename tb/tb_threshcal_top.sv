// tb_threshcal_top: end-to-end testbench of the threshold calibration block.
//
// The block runs with a shortened measurement window (2^10 samples) and
// shortened steps (1200 cycles) so that many calibrations fit in a short
// simulation; the algorithm is unchanged. A behavioural front end
// (disc_model) turns the threshold TH into a noisy discriminator pulse
// around a chosen equivalent baseline. The testbench checks that:
//   * after power-on reset every output is zero and the gated clock is off;
//   * a calibration, launched by a rising edge of ScanStart, finds BL within
//     1 DAC code of the model baseline over the range 100..500 and a
//     non-zero noise width, takes 35 steps, and applies TH = BL + TH_offset;
//   * in bypass mode TH follows DAC and one ScanStart edge gives one
//     measurement: full count far below the baseline, zero far above, a
//     count in between at the baseline;
//   * a low pulse on one of the three power-on reset inputs is outvoted,
//     on two it resets the block;
//   * the external reset stops a scan with all outputs zero;
//   * an upset injected into one copy of a triplicated register is outvoted
//     and corrected, and the calibration result is unaffected.
// Every one of these mechanisms is counted; one that never happened counts
// as a failure.
module tb_threshcal_top;

  localparam int unsigned CNT    = 10;
  localparam int unsigned N      = 1 << CNT;
  localparam int unsigned STEP   = 1200;
  localparam int unsigned SETTLE = 100;

  int checks = 0, failures = 0;
  int n_cal = 0, n_sar_clear = 0, n_bypass = 0, n_gated = 0, n_reset = 0,
      n_seu = 0, n_noise = 0, n_sat = 0, n_por_vote = 0;

  logic clk = 1'b0;
  always #12.5 clk = ~clk;

  logic [2:0] por_n = 3'b111;
  logic       ext_rst_n = 1'b1;
  initial #1 por_n = 3'b000;  // power-on reset pulse
  logic       scan_start = 1'b0, bypass = 1'b0;
  logic [9:0] dac = '0;
  logic [5:0] th_offset = '0;
  logic       disc;
  logic [9:0] th, bl;
  logic [3:0] nw;
  logic       scan_done, seu_err;
  logic [CNT:0] acc;
  real        baseline = 172.3, sigma = 0.6;

  threshcal_top #(.CNT_BITS(CNT), .STEP_CYCLES(STEP), .SETTLE_CYCLES(SETTLE)) dut (
    .clk(clk), .por_n(por_n), .ext_rst_n(ext_rst_n), .scan_start(scan_start),
    .bypass(bypass), .dac(dac), .th_offset(th_offset), .disc_pulse(disc),
    .th(th), .bl(bl), .nw(nw), .scan_done(scan_done), .acc(acc), .seu_err(seu_err));

  disc_model u_fe (.th(th), .baseline(baseline), .sigma(sigma), .hyst(0.0), .disc(disc));

  // edges of the gated clock
  int gclk_edges = 0;
  always @(posedge dut.gclk) gclk_edges++;
  int seu_err_cycles = 0;
  always @(posedge clk) if (seu_err) seu_err_cycles++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic wait_done(output int cycles);
    cycles = 0;
    // ScanDone of the previous run stays high until the start edge is seen
    while (scan_done && cycles < 10) begin
      @(posedge clk);
      cycles++;
    end
    check(!scan_done, "ScanDone cleared at start");
    while (!scan_done && cycles < 40 * STEP) begin
      @(posedge clk);
      cycles++;
    end
  endtask

  task automatic calibrate(input real b, input int off, input bit inject_seu);
    int cycles, exp_th;
    real err;
    baseline  = b;
    th_offset = 6'(off);
    bypass    = 1'b0;
    @(negedge clk) scan_start = 1'b0;
    repeat (3) @(negedge clk);
    @(negedge clk) scan_start = 1'b1;
    if (inject_seu) begin
      logic [$bits(dut.u_fsm.u_state.r1)-1:0] v;
      logic [$bits(dut.u_acc.u_state.r2)-1:0] w;
      int n_before;
      repeat (7 * STEP + 300) @(posedge clk);
      n_before = seu_err_cycles;
      @(negedge clk);
      v = dut.u_fsm.u_state.r1;
      w = dut.u_acc.u_state.r2;
      force dut.u_fsm.u_state.r1 = ~v;
      force dut.u_acc.u_state.r2 = ~w;
      #2;
      release dut.u_fsm.u_state.r1;
      release dut.u_acc.u_state.r2;
      check(seu_err, "upset copy flagged");
      repeat (2) @(posedge clk);
      #1 check(!seu_err, "upset copy corrected at the next edge");
      if (seu_err_cycles > n_before) n_seu++;
    end
    wait_done(cycles);
    if (!inject_seu)
      check(cycles >= 35 * STEP && cycles <= 35 * STEP + 8,
            $sformatf("calibration took %0d cycles, expected 35 x %0d + a few", cycles, STEP));
    err = real'(bl) - b;
    check(err <= 1.0 && err >= -1.0, $sformatf("BL=%0d model baseline %f", bl, b));
    check(nw >= 4'd1 && nw <= 4'd8, $sformatf("NW=%0d", nw));
    exp_th = int'(bl) + off;
    if (exp_th > 1023) begin
      exp_th = 1023;
      n_sat++;
    end
    check(int'(th) == exp_th, $sformatf("TH=%0d expected BL+offset=%0d", th, exp_th));
    if (bl < 10'd512) n_sar_clear++;
    n_cal++;
    // after the scan the clock is gated off again
    begin
      int e0;
      repeat (4) @(posedge clk);
      e0 = gclk_edges;
      repeat (500) @(posedge clk);
      check(gclk_edges == e0, "clock gated off after calibration");
      if (gclk_edges == e0) n_gated++;
    end
  endtask

  task automatic bypass_measure(input int code, output int result);
    int cycles;
    bypass = 1'b1;
    dac    = 10'(code);
    @(negedge clk) scan_start = 1'b0;
    repeat (3) @(negedge clk);
    #1 check(th == 10'(code), "bypass drives TH from DAC");
    @(negedge clk) scan_start = 1'b1;
    wait_done(cycles);
    check(cycles >= N && cycles <= N + 10, $sformatf("bypass measurement %0d cycles", cycles));
    result = int'(acc);
    n_bypass++;
    if (dut.noise_flag) n_noise++;
  endtask

  initial begin
    int r;
    repeat (3) @(negedge clk);
    #1 check(th == '0 && bl == '0 && nw == '0 && !scan_done && acc == '0, "zero after power-on reset");
    por_n = 3'b111;
    begin
      int e0;
      repeat (2) @(posedge clk);
      e0 = gclk_edges;
      repeat (200) @(posedge clk);
      check(gclk_edges == e0, "clock gated while idle");
    end

    calibrate(172.3, 8, 1'b0);
    calibrate(100.0, 0, 1'b0);
    calibrate(250.75, 20, 1'b0);
    calibrate(499.5, 63, 1'b0);
    calibrate(512.25, 3, 1'b0);
    calibrate(1019.0, 40, 1'b0);
    for (int i = 0; i < 4; i++)
      calibrate(100.0 + real'($urandom() % 1600) / 4.0, 10, 1'b0);
    calibrate(333.4, 10, 1'b1);  // with an injected upset

    baseline = 172.3;
    bypass_measure(150, r);
    check(r == N, $sformatf("bypass below baseline: Acc=%0d expected %0d", r, N));
    bypass_measure(200, r);
    check(r == 0, $sformatf("bypass above baseline: Acc=%0d expected 0", r));
    bypass_measure(172, r);
    check(r > 0 && r < N, $sformatf("bypass at baseline: Acc=%0d inside (0,%0d)", r, N));
    check(dut.noise_flag, "NoiseFlag at baseline");

    // a low pulse on one power-on reset cell alone is outvoted
    begin
      logic [9:0] bl_keep;
      bl_keep = bl;
      @(negedge clk) por_n = 3'b101;
      repeat (3) @(negedge clk);
      check(bl == bl_keep && scan_done, "one POR cell cannot reset the block");
      if (bl == bl_keep && scan_done) n_por_vote++;
      por_n = 3'b111;
      @(negedge clk) por_n = 3'b100;
      #1 check(bl == '0 && !scan_done, "two POR cells reset the block");
      @(negedge clk) por_n = 3'b111;
    end

    // external reset in the middle of a scan
    bypass = 1'b0;
    @(negedge clk) scan_start = 1'b0;
    repeat (3) @(negedge clk);
    @(negedge clk) scan_start = 1'b1;
    repeat (3 * STEP) @(negedge clk);
    ext_rst_n = 1'b0;
    #1 check(th == '0 && bl == '0 && nw == '0 && !scan_done && acc == '0, "external reset clears outputs");
    repeat (3) @(negedge clk);
    ext_rst_n = 1'b1;
    begin
      int e0;
      e0 = gclk_edges;
      repeat (3 * STEP) @(posedge clk);
      check(gclk_edges == e0 && !scan_done, "scan suspended after reset");
      if (gclk_edges == e0) n_reset++;
    end
    // ScanStart still high: only a new rising edge restarts
    @(negedge clk) scan_start = 1'b0;
    calibrate(222.0, 5, 1'b0);

    $display("mechanisms: calibrations=%0d sar_bit_cleared=%0d bypass=%0d clock_gated=%0d reset=%0d seu_corrected=%0d noise_flag=%0d th_saturated=%0d por_vote=%0d",
             n_cal, n_sar_clear, n_bypass, n_gated, n_reset, n_seu, n_noise, n_sat, n_por_vote);
    check(n_cal > 0, "calibration happened");
    check(n_sar_clear > 0, "SAR cleared a bit");
    check(n_bypass > 0, "bypass measurement happened");
    check(n_gated > 0, "clock gating happened");
    check(n_reset > 0, "reset during scan happened");
    check(n_seu > 0, "upset correction happened");
    check(n_noise > 0, "NoiseFlag raised");
    check(n_sat > 0, "TH saturation happened");
    check(n_por_vote > 0, "POR vote exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (14 * 40 * STEP) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
