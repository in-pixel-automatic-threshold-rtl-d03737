// tb_accbit_sweep: calibration with different accumulator widths.
//
// Three calibration blocks with accumulators of 8, 12 and 16 bits (window
// counters of 7, 11 and 15 bits; the 16-bit one at its default step of
// 40000 cycles) calibrate the same front-end model: baseline 172.3 codes,
// noise 0.6 codes standard deviation. All three must find BL within one
// code of the baseline. A longer window resolves the rarer noise crossings
// further from the baseline, so the noise width must not shrink as the
// accumulator grows, and must grow from 8 to 16 bits.
module tb_accbit_sweep;

  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #12.5 clk = ~clk;

  logic [2:0] por_n = 3'b111;
  logic       scan_start = 1'b0;
  real        baseline = 172.3, sigma = 0.6;

  logic [9:0] th8, th12, th16, bl8, bl12, bl16;
  logic [3:0] nw8, nw12, nw16;
  logic       d8, d12, d16, done8, done12, done16, e8, e12, e16;
  logic [7:0]  acc8;
  logic [11:0] acc12;
  logic [15:0] acc16;

  threshcal_top #(.CNT_BITS(7), .STEP_CYCLES(300), .SETTLE_CYCLES(100)) dut8 (
    .clk(clk), .por_n(por_n), .ext_rst_n(1'b1), .scan_start(scan_start), .bypass(1'b0),
    .dac(10'd0), .th_offset(6'd0), .disc_pulse(d8), .th(th8), .bl(bl8), .nw(nw8),
    .scan_done(done8), .acc(acc8), .seu_err(e8));
  threshcal_top #(.CNT_BITS(11), .STEP_CYCLES(2200), .SETTLE_CYCLES(100)) dut12 (
    .clk(clk), .por_n(por_n), .ext_rst_n(1'b1), .scan_start(scan_start), .bypass(1'b0),
    .dac(10'd0), .th_offset(6'd0), .disc_pulse(d12), .th(th12), .bl(bl12), .nw(nw12),
    .scan_done(done12), .acc(acc12), .seu_err(e12));
  threshcal_top dut16 (
    .clk(clk), .por_n(por_n), .ext_rst_n(1'b1), .scan_start(scan_start), .bypass(1'b0),
    .dac(10'd0), .th_offset(6'd0), .disc_pulse(d16), .th(th16), .bl(bl16), .nw(nw16),
    .scan_done(done16), .acc(acc16), .seu_err(e16));

  disc_model u_fe8  (.th(th8),  .baseline(baseline), .sigma(sigma), .hyst(0.0), .disc(d8));
  disc_model u_fe12 (.th(th12), .baseline(baseline), .sigma(sigma), .hyst(0.0), .disc(d12));
  disc_model u_fe16 (.th(th16), .baseline(baseline), .sigma(sigma), .hyst(0.0), .disc(d16));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic bit near(logic [9:0] bl);
    return real'(bl) - baseline <= 1.0 && baseline - real'(bl) <= 1.0;
  endfunction

  initial begin
    #1 por_n = 3'b000;
    repeat (3) @(negedge clk);
    por_n = 3'b111;
    repeat (6) @(negedge clk);
    scan_start = 1'b1;
    wait (done8 && done12 && done16);
    @(negedge clk);
    $display("AccBit  8: BL=%0d NW=%0d", bl8, nw8);
    $display("AccBit 12: BL=%0d NW=%0d", bl12, nw12);
    $display("AccBit 16: BL=%0d NW=%0d", bl16, nw16);
    check(near(bl8), "8-bit BL within one code");
    check(near(bl12), "12-bit BL within one code");
    check(near(bl16), "16-bit BL within one code");
    check(nw8 != 0 && nw8 <= nw12 && nw12 <= nw16, "noise width does not shrink with AccBit");
    check(nw16 > nw8, "noise width grows from 8 to 16 bits");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1500000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
