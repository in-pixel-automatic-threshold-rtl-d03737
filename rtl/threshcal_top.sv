// threshcal_top: in-pixel automatic threshold calibration block.
//
// Finds the equivalent baseline of a pixel's discriminator, the threshold
// at which the noisy discriminator output is high half of the time, and the
// width of the noise transition around it, without any injected charge.
// A rising edge of scan_start (ScanStart) launches the calibration: the
// state machine (cal_fsm) steps the 10-bit threshold TH through a binary
// successive approximation and a linear scan, and for every threshold the
// sample accumulator counts how many of 32768 clock-edge samples of the
// discriminator pulse are 1. After 35 steps of 1 ms, bl (BL[9:0]) and nw
// (NW[3:0]) hold the result, scan_done (ScanDone) is high and TH becomes
// BL + TH_offset. With bypass high, TH is the user code dac (DAC[9:0]) and a
// rising edge of scan_start runs one measurement whose count is read on acc
// (Acc[15:0]).
//
// Structure: ScanStart edge detector on the free-running clock, a clock
// gate that runs the rest only while a scan or measurement is busy, the
// state machine, the sample accumulator and the Bypass multiplexer in front
// of the threshold DAC. The block has two reset sources, both active low:
// three power-on reset cells, whose outputs are combined by a two-out-of-
// three vote so that a transient on one cell does not reset the block, and
// the external reset. After reset every output is zero. The
// slow-control registers, the DAC, the preamplifier, the discriminator and
// its output buffer, and the power-on reset cells lie outside this block and
// meet it at its ports. The seu_err output, high while any triplicated
// register copy disagrees with its two twins, is this design's addition.
//
// Interface: all inputs except disc_pulse, scan_start, por_n and ext_rst_n
// are static configuration; disc_pulse and scan_start are asynchronous.
// Timing: the calibration takes 35 * STEP_CYCLES clock periods plus a few
// cycles for edge detection and gating (35 ms at 40 MHz).
module threshcal_top #(
  parameter int unsigned CNT_BITS      = threshcal_pkg::CNT_BITS,
  parameter int unsigned STEP_CYCLES   = threshcal_pkg::STEP_CYCLES,
  parameter int unsigned SETTLE_CYCLES = threshcal_pkg::SETTLE_CYCLES
) (
  input  logic                                 clk,
  input  logic [2:0]                           por_n,
  input  logic                                 ext_rst_n,
  input  logic                                 scan_start,
  input  logic                                 bypass,
  input  logic [threshcal_pkg::DAC_BITS-1:0]    dac,
  input  logic [threshcal_pkg::OFFSET_BITS-1:0] th_offset,
  input  logic                                 disc_pulse,
  output logic [threshcal_pkg::DAC_BITS-1:0]    th,
  output logic [threshcal_pkg::DAC_BITS-1:0]    bl,
  output logic [threshcal_pkg::NW_BITS-1:0]     nw,
  output logic                                 scan_done,
  output logic [CNT_BITS:0]                    acc,
  output logic                                 seu_err
);
  import threshcal_pkg::*;

  logic                rst_n;
  logic                start;
  logic                gclk;
  logic                fsm_busy, acc_busy;
  logic                meas_start, meas_done, noise_flag;
  logic                fsm_err, acc_err, det_err;
  logic [DAC_BITS-1:0] th_reg;

  logic por_vote_n;

  // two-out-of-three vote of the power-on reset cells
  assign por_vote_n = (por_n[0] & por_n[1]) | (por_n[1] & por_n[2]) | (por_n[0] & por_n[2]);
  assign rst_n      = por_vote_n & ext_rst_n;

  scan_start_detect u_start (
    .clk       (clk),
    .rst_n     (rst_n),
    .scan_start(scan_start),
    .start     (start),
    .seu_err   (det_err)
  );

  clock_gate u_cg (
    .clk (clk),
    .en  (start | fsm_busy | acc_busy),
    .gclk(gclk)
  );

  cal_fsm #(
    .CNT_BITS     (CNT_BITS),
    .STEP_CYCLES  (STEP_CYCLES),
    .SETTLE_CYCLES(SETTLE_CYCLES)
  ) u_fsm (
    .clk       (gclk),
    .rst_n     (rst_n),
    .start     (start),
    .bypass    (bypass),
    .th_offset (th_offset),
    .meas_start(meas_start),
    .meas_done (meas_done),
    .acc       (acc),
    .noise_flag(noise_flag),
    .th_reg    (th_reg),
    .bl        (bl),
    .nw        (nw),
    .scan_done (scan_done),
    .busy      (fsm_busy),
    .seu_err   (fsm_err)
  );

  sample_accumulator #(.CNT_BITS(CNT_BITS)) u_acc (
    .clk       (gclk),
    .rst_n     (rst_n),
    .start     (meas_start),
    .disc      (disc_pulse),
    .acc       (acc),
    .done      (meas_done),
    .busy      (acc_busy),
    .noise_flag(noise_flag),
    .seu_err   (acc_err)
  );

  // Bypass multiplexer: S0 = Bypass, input 1 = DAC[9:0], input 0 = TH_reg[9:0]
  assign th      = bypass ? dac : th_reg;
  assign seu_err = fsm_err | acc_err | det_err;

endmodule
