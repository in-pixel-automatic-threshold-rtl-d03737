// tb_sample_accumulator: self-checking testbench of the sample accumulator.
//
// Two instances are tested: one with a short window (2^6 samples) and one
// with the full 2^15-sample window. The discriminator input is driven at
// the falling clock edge with constant, alternating and random patterns; the
// testbench records the input at each rising edge it expects to be a
// sampling edge (the 2^CNT_BITS edges after the one that sees start) and
// compares its own count with Acc. It also checks that Acc and done appear
// exactly two edges after the last sampling edge, that ScanBusy covers the
// window, NoiseFlag, that a start during a window is ignored, and that
// reset clears Acc.
module tb_sample_accumulator;

  int checks = 0, failures = 0;
  logic clk = 1'b0;
  logic rst_n = 1'b1;
  initial #1 rst_n = 1'b0;

  always #12.5 clk = ~clk;  // 40 MHz

  // small instance
  localparam int unsigned SB = 6;
  logic          s_start = 1'b0, s_disc = 1'b0;
  logic [SB:0]   s_acc;
  logic          s_done, s_busy, s_nf, s_err;
  sample_accumulator #(.CNT_BITS(SB)) dut_s (
    .clk(clk), .rst_n(rst_n), .start(s_start), .disc(s_disc), .acc(s_acc),
    .done(s_done), .busy(s_busy), .noise_flag(s_nf), .seu_err(s_err));

  // full-size instance
  logic          f_start = 1'b0, f_disc = 1'b0;
  logic [15:0]   f_acc;
  logic          f_done, f_busy, f_nf, f_err;
  sample_accumulator dut_f (
    .clk(clk), .rst_n(rst_n), .start(f_start), .disc(f_disc), .acc(f_acc),
    .done(f_done), .busy(f_busy), .noise_flag(f_nf), .seu_err(f_err));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // mode: 0 all zero, 1 all one, 2 alternating 1,0,1,0, 3 random
  function automatic logic pattern(int mode, int k);
    case (mode)
      0: return 1'b0;
      1: return 1'b1;
      2: return (k % 2) == 0;
      default: return 1'($urandom());
    endcase
  endfunction

  // Runs one window on the small (full=0) or the full-size instance.
  task automatic run_window(input bit full, input int mode, input bit restart_mid);
    int n, expected, k, lat;
    logic [15:0] got;
    bit seen_done;
    n = full ? (1 << 15) : (1 << SB);
    expected = 0;
    @(negedge clk);
    if (full) f_start = 1'b1; else s_start = 1'b1;
    if (full) f_disc = pattern(mode, 0); else s_disc = pattern(mode, 0);
    @(posedge clk);  // edge S: start seen
    @(negedge clk);
    if (full) f_start = 1'b0; else s_start = 1'b0;
    for (k = 0; k < n; k++) begin
      @(posedge clk);  // sampling edge S+1+k
      expected += full ? int'(f_disc) : int'(s_disc);
      @(negedge clk);
      check(full ? f_busy : s_busy, "ScanBusy high during window");
      check(!(full ? f_done : s_done), "no done inside window");
      if (full) f_disc = pattern(mode, k + 1); else s_disc = pattern(mode, k + 1);
      if (restart_mid && k == n / 2) begin
        if (full) f_start = 1'b1; else s_start = 1'b1;
      end else begin
        if (full) f_start = 1'b0; else s_start = 1'b0;
      end
    end
    // acc must appear exactly two edges after the last sampling edge
    seen_done = 1'b0;
    lat = 0;
    for (int e = 1; e <= 4; e++) begin
      @(posedge clk);
      #1;
      if ((full ? f_done : s_done) && !seen_done) begin
        seen_done = 1'b1;
        lat = e;
      end
    end
    check(seen_done && lat == 2, $sformatf("done two edges after last sample (got %0d)", lat));
    got = full ? f_acc : 16'(s_acc);
    check(int'(got) == expected, $sformatf("Acc=%0d expected %0d (mode %0d)", got, expected, mode));
    check((full ? f_nf : s_nf) == (expected != 0 && expected != n),
          $sformatf("NoiseFlag for Acc=%0d", got));
    check(!(full ? f_busy : s_busy), "ScanBusy low after window");
  endtask

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    check(s_acc == '0 && f_acc == '0 && !s_busy && !f_busy, "all zero after reset");
    for (int m = 0; m < 4; m++) run_window(1'b0, m, 1'b0);
    run_window(1'b0, 3, 1'b1);  // start during a window is ignored
    run_window(1'b0, 3, 1'b0);
    run_window(1'b1, 2, 1'b0);  // 16384 of 32768, the half point
    run_window(1'b1, 1, 1'b0);  // the full count 32768 fits in 16 bits
    run_window(1'b1, 3, 1'b0);
    check(!s_err && !f_err, "no TMR mismatch");
    @(negedge clk) rst_n = 1'b0;
    #1 check(s_acc == '0 && f_acc == '0, "reset clears Acc");
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
