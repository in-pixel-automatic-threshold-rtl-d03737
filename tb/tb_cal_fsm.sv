// tb_cal_fsm: self-checking testbench of the calibration state machine.
//
// The sample accumulator is replaced by a response model: MEAS_LAT cycles
// after meas_start it returns done with an accumulator number taken from an
// S-shaped transfer curve around a chosen baseline b (full count below
// b - W, zero above b + W, a straight ramp between). A reference
// calibration written here in plain procedural code computes, from the same
// curve, the thresholds the scan must visit, BL and NW. The testbench
// checks every threshold the state machine applies at each measurement, BL,
// NW, TH = BL + TH_offset with saturation, the 35-step duration, stretching
// of a step whose measurement is late, the linear window clamped at both
// ends of the DAC range, a bypass measurement, and reset to zero outputs.
module tb_cal_fsm;

  localparam int unsigned STEP   = 64;
  localparam int unsigned SETTLE = 8;
  localparam int unsigned N      = 32768;

  int checks = 0, failures = 0;
  int stalls_seen = 0;
  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;
  always #12.5 clk = ~clk;

  logic        start = 1'b0, bypass = 1'b0;
  logic [5:0]  th_offset = '0;
  logic        meas_start, meas_done = 1'b0, noise_flag = 1'b0;
  logic [15:0] acc = '0;
  logic [9:0]  th_reg, bl;
  logic [3:0]  nw;
  logic        scan_done, busy, seu_err;

  cal_fsm #(.STEP_CYCLES(STEP), .SETTLE_CYCLES(SETTLE)) dut (
    .clk(clk), .rst_n(rst_n), .start(start), .bypass(bypass), .th_offset(th_offset),
    .meas_start(meas_start), .meas_done(meas_done), .acc(acc), .noise_flag(noise_flag),
    .th_reg(th_reg), .bl(bl), .nw(nw), .scan_done(scan_done), .busy(busy), .seu_err(seu_err));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // transfer curve: b in quarter codes, half width w in codes
  real  b_model = 300.0, w_model = 2.5;
  int   meas_lat = 20;
  function automatic int curve(int th);
    real x, v;
    x = real'(th) - b_model;
    if (x <= -w_model) return N;
    if (x >= w_model) return 0;
    v = real'(N) * (0.5 - x / (2.0 * w_model));
    return int'(v);
  endfunction

  // accumulator response model
  int   countdown = 0;
  int   pending = 0;
  int   th_log[$];
  always @(posedge clk) begin
    meas_done <= 1'b0;
    if (meas_start) begin
      countdown <= meas_lat;
      pending   <= curve(int'(th_reg));
      th_log.push_back(int'(th_reg));
    end else if (countdown > 0) begin
      countdown <= countdown - 1;
      if (countdown == 1) begin
        meas_done  <= 1'b1;
        acc        <= 16'(pending);
        noise_flag <= (pending != 0) && (pending != N);
      end
    end
  end

  // reference calibration
  int ref_th[$];
  int ref_bl, ref_nw;
  task automatic reference();
    int t, bl_int, lo, best, d, a;
    ref_th.delete();
    t = 0;
    for (int bit_i = 9; bit_i >= 0; bit_i--) begin
      t = t | (1 << bit_i);
      ref_th.push_back(t);
      if (curve(t) < N / 2) t = t & ~(1 << bit_i);
    end
    bl_int = t;
    lo = bl_int - 12;
    if (lo < 0) lo = 0;
    if (lo > 1023 - 24) lo = 1023 - 24;
    best = -1;
    ref_nw = 0;
    for (int j = 0; j < 25; j++) begin
      ref_th.push_back(lo + j);
      a = curve(lo + j);
      d = (a >= N / 2) ? a - N / 2 : N / 2 - a;
      if (best < 0 || d < best) begin
        best = d;
        ref_bl = lo + j;
      end
      if (a != 0 && a != N && ref_nw < 15) ref_nw++;
    end
  endtask

  task automatic pulse_start(input bit byp);
    @(negedge clk);
    bypass = byp;
    start  = 1'b1;
    @(negedge clk);
    start  = 1'b0;
  endtask

  task automatic calibrate(input real b, input int off, input int lat);
    int cycles, expect_cycles, exp_th;
    b_model  = b;
    meas_lat = lat;
    th_offset = 6'(off);
    th_log.delete();
    reference();
    pulse_start(1'b0);
    cycles = 0;
    check(busy && !scan_done, "busy after start");
    check(th_reg == 10'd512, "SAR starts at 512");
    while (!scan_done && cycles < 100 * STEP * 35) begin
      @(negedge clk);
      cycles++;
    end
    // with a late measurement each step lasts until its result is in
    expect_cycles = 35 * ((SETTLE + lat + 4 > STEP) ? SETTLE + lat + 4 : STEP);
    if (SETTLE + lat + 4 > STEP) stalls_seen++;
    check(cycles == expect_cycles, $sformatf("calibration took %0d cycles, expected %0d",
                                             cycles, expect_cycles));
    check(th_log.size() == 35, $sformatf("35 measurements, got %0d", th_log.size()));
    for (int i = 0; i < th_log.size() && i < ref_th.size(); i++)
      check(th_log[i] == ref_th[i], $sformatf("step %0d TH=%0d expected %0d", i, th_log[i], ref_th[i]));
    check(int'(bl) == ref_bl, $sformatf("BL=%0d expected %0d (b=%f)", bl, ref_bl, b));
    check(int'(nw) == ref_nw, $sformatf("NW=%0d expected %0d", nw, ref_nw));
    exp_th = ref_bl + off;
    if (exp_th > 1023) exp_th = 1023;
    check(int'(th_reg) == exp_th, $sformatf("TH=%0d expected BL+offset %0d", th_reg, exp_th));
    check(!busy, "idle after calibration");
  endtask

  initial begin
    repeat (2) @(negedge clk);
    check(th_reg == '0 && bl == '0 && nw == '0 && !scan_done && !meas_start, "zero after reset");
    rst_n = 1'b1;
    calibrate(300.0, 10, 20);
    check(bl == 10'd300, "BL at an integer baseline");
    check(nw == 4'd5, "NW of a 5-code transition");
    calibrate(171.75, 0, 20);
    check(bl == 10'd172, "BL rounds 171.75 to 172");
    calibrate(511.5, 63, 20);
    calibrate(512.4, 5, 20);
    calibrate(3.0, 7, 20);       // linear window clamped at code 0
    calibrate(1021.0, 40, 20);   // clamped at 1023, TH saturates
    check(th_reg == 10'd1023, "TH saturates at 1023");
    calibrate(600.2, 1, 70);     // measurement later than the step: stretched
    // TH_offset change after the scan applies directly
    @(negedge clk) th_offset = 6'd2;
    #1 check(int'(th_reg) == int'(bl) + 2, "TH follows TH_offset");
    // bypass measurement: one window, BL/NW kept
    begin
      logic [9:0] bl_before;
      logic [3:0] nw_before;
      int n_before;
      bl_before = bl;
      nw_before = nw;
      n_before  = th_log.size();
      meas_lat  = 20;
      pulse_start(1'b1);
      check(!scan_done && busy, "bypass measurement busy");
      repeat (40) @(negedge clk);
      check(th_log.size() == n_before + 1, "bypass runs one measurement");
      check(scan_done && !busy, "bypass measurement done");
      check(bl == bl_before && nw == nw_before, "bypass keeps BL and NW");
    end
    // reset in the middle of a scan
    bypass = 1'b0;
    pulse_start(1'b0);
    repeat (5 * STEP) @(negedge clk);
    rst_n = 1'b0;
    #1 check(th_reg == '0 && bl == '0 && nw == '0 && !scan_done && !busy, "reset suspends the scan");
    @(negedge clk) rst_n = 1'b1;
    repeat (3 * STEP) @(negedge clk);
    check(!busy && th_log.size() > 0, "stays idle after reset");
    check(stalls_seen > 0, "stretched step exercised");
    check(!seu_err, "no TMR mismatch");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
