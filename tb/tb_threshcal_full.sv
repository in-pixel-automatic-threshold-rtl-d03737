// tb_threshcal_full: the threshold calibration block at its full size.
//
// Every parameter keeps its default: a 2^15-sample window counted into a
// 16-bit accumulator and 40000-cycle (1 ms) steps at 40 MHz. A behavioural
// front end places the equivalent baseline at 172.3 DAC codes with a noise
// of 0.6 codes (standard deviation). The testbench runs one complete
// calibration and checks that it lasts 35 ms, that BL is within one code of
// the baseline, that NW is non-zero and that TH = BL + TH_offset. It then
// runs one bypass measurement at the baseline code and checks that the
// 32768-sample window gives a count strictly between 0 and 32768 and
// takes 0.82 ms.
module tb_threshcal_full;

  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #12.5 clk = ~clk;  // 40 MHz

  logic [2:0] por_n = 3'b111;
  logic       ext_rst_n = 1'b1;
  logic        scan_start = 1'b0, bypass = 1'b0;
  logic [9:0]  dac = '0;
  logic [5:0]  th_offset = 6'd20;
  logic        disc;
  logic [9:0]  th, bl;
  logic [3:0]  nw;
  logic        scan_done, seu_err;
  logic [15:0] acc;
  real         baseline = 172.3, sigma = 0.6;

  threshcal_top dut (
    .clk(clk), .por_n(por_n), .ext_rst_n(ext_rst_n), .scan_start(scan_start),
    .bypass(bypass), .dac(dac), .th_offset(th_offset), .disc_pulse(disc),
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
    int  cycles;
    real t0, ms;
    #1 por_n = 3'b000;
    repeat (3) @(negedge clk);
    check(th == '0 && bl == '0 && nw == '0 && !scan_done, "zero after reset");
    por_n = 3'b111;
    repeat (10) @(negedge clk);
    scan_start = 1'b1;
    t0 = $realtime;
    cycles = 0;
    while (!scan_done && cycles < 1500000) begin
      @(posedge clk);
      cycles++;
    end
    ms = ($realtime - t0) / 1.0e6;
    $display("calibration: %0d cycles (%f ms), BL=%0d NW=%0d TH=%0d", cycles, ms, bl, nw, th);
    check(cycles >= 35 * 40000 && cycles <= 35 * 40000 + 8, "calibration lasts 35 x 40000 cycles");
    check(ms > 34.9 && ms < 35.1, "calibration lasts 35 ms");
    check(real'(bl) - baseline <= 1.0 && baseline - real'(bl) <= 1.0, "BL within one code");
    check(nw != 4'd0, "noise width found");
    check(th == bl + 10'd20, "TH = BL + TH_offset");
    check(!seu_err, "no TMR mismatch");

    // one bypass measurement at the baseline code
    bypass = 1'b1;
    dac = 10'd172;
    scan_start = 1'b0;
    repeat (5) @(negedge clk);
    check(th == 10'd172, "bypass drives TH from DAC");
    scan_start = 1'b1;
    repeat (8) @(posedge clk);
    cycles = 8;
    check(!scan_done, "ScanDone cleared");
    while (!scan_done && cycles < 40000) begin
      @(posedge clk);
      cycles++;
    end
    $display("bypass measurement: Acc=%0d after %0d cycles", acc, cycles);
    check(cycles >= 32768 && cycles <= 32768 + 10, "window of 32768 samples");
    check(acc > 16'd0 && acc < 16'd32768, "count inside the transition");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1600000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
