// cal_fsm: state machine of the automatic threshold calibration.
//
// A start pulse with bypass low launches a full calibration of 35 steps, one
// step every STEP_CYCLES clock periods (1 ms at 40 MHz, 35 ms in all):
//   * 10 steps of binary successive approximation over the 10-bit threshold,
//     starting at the middle code 512. After each measurement, if the
//     accumulator number is below half of its maximum (the threshold is above
//     the baseline) the trial bit is cleared, otherwise it is kept, and the
//     next lower bit is tried. The result is the rough baseline BL_int.
//   * 25 steps of an upward linear scan from BL_int-12 to BL_int+12.
//     The equivalent baseline BL is the scanned threshold whose accumulator
//     number is nearest to half of the maximum (the lowest one on a tie).
//     The noise width NW counts the scanned thresholds whose measurement
//     raised NoiseFlag (accumulator strictly between 0 and the maximum),
//     saturating at 15.
// Within a step the threshold is applied first, the measurement window is
// started SETTLE_CYCLES later so that the DAC output is stable, and the next
// threshold is applied when the step time is over. If a measurement has not
// finished by then, the step is stretched until it has.
// When the calibration ends, scan_done rises and th_reg becomes
// BL + TH_offset (saturating at 1023); the offset is added combinationally so
// that a later change of TH_offset applies even while the clock is gated off.
// A start pulse with bypass high runs one measurement only (bypass mode); its
// result is the Acc value of the sample accumulator, BL and NW are kept.
//
// Follows the calibration scheme: SAR from 512, the halfway decision, the
// 25-point linear window, 1 ms steps, BL + TH_offset, the bypass
// measurement, all-zero outputs after reset. This design's choices: BL as the
// point nearest to half, NW as the count of NoiseFlag points, the clamping of
// the linear window to codes 0..1023, the settling time, scan_done also
// marking the end of a bypass measurement, start pulses ignored while busy,
// and th_reg = 0 before the first complete calibration. All state is
// triplicated (tmr_reg).
//
// Interface:
//   clk, rst_n    gated 40 MHz clock, asynchronous active-low reset
//   start         one-cycle pulse from the ScanStart rising-edge detector
//   bypass        selects the single manual measurement at start
//   th_offset     TH_offset[5:0]
//   meas_start    one-cycle pulse to the sample accumulator
//   meas_done,    end of a measurement window and its result
//   acc, noise_flag
//   th_reg        TH_reg[9:0] towards the threshold multiplexer
//   bl, nw        BL[9:0], NW[3:0]
//   scan_done     ScanDone
//   busy          high while a scan or bypass measurement runs (clock enable)
//   seu_err       some triplicated register copy disagrees with the others
module cal_fsm #(
  parameter int unsigned DAC_BITS      = threshcal_pkg::DAC_BITS,
  parameter int unsigned CNT_BITS      = threshcal_pkg::CNT_BITS,
  parameter int unsigned ACC_BITS      = CNT_BITS + 1,
  parameter int unsigned NW_BITS       = threshcal_pkg::NW_BITS,
  parameter int unsigned OFFSET_BITS   = threshcal_pkg::OFFSET_BITS,
  parameter int unsigned LIN_HALF      = threshcal_pkg::LIN_HALF,
  parameter int unsigned STEP_CYCLES   = threshcal_pkg::STEP_CYCLES,
  parameter int unsigned SETTLE_CYCLES = threshcal_pkg::SETTLE_CYCLES
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  logic                   bypass,
  input  logic [OFFSET_BITS-1:0] th_offset,
  output logic                   meas_start,
  input  logic                   meas_done,
  input  logic [ACC_BITS-1:0]    acc,
  input  logic                   noise_flag,
  output logic [DAC_BITS-1:0]    th_reg,
  output logic [DAC_BITS-1:0]    bl,
  output logic [NW_BITS-1:0]     nw,
  output logic                   scan_done,
  output logic                   busy,
  output logic                   seu_err
);
  import threshcal_pkg::*;

  localparam int unsigned TMR_W   = $clog2(STEP_CYCLES);
  localparam int unsigned LIN_STEPS = 2 * LIN_HALF + 1;
  localparam int unsigned IDX_W   = $clog2(DAC_BITS + LIN_STEPS + 1);
  localparam logic [ACC_BITS-1:0] HALF     = ACC_BITS'(1) << (CNT_BITS - 1);
  localparam logic [DAC_BITS-1:0] DAC_MAX  = '1;
  localparam logic [DAC_BITS-1:0] LIN_TOP  = DAC_MAX - DAC_BITS'(2 * LIN_HALF);

  typedef struct packed {
    cal_state_e          st;
    logic [TMR_W-1:0]    timer;      // cycle within the current step
    logic [IDX_W-1:0]    idx;        // step number within the SAR or linear scan
    logic [DAC_BITS-1:0] th;         // threshold applied during the scan
    logic [DAC_BITS-1:0] bl;         // best linear point so far, then BL
    logic [ACC_BITS-1:0] best_dist;  // |Acc - half| of that point
    logic [NW_BITS-1:0]  nw;
    logic                have_res;   // this step's measurement has finished
    logic                res_low;    // ... and its Acc was below half
    logic                meas_start;
    logic                scan_done;
    logic                cal_valid;  // a full calibration has completed
  } fsm_state_t;

  fsm_state_t cur, nxt;

  // Linear scan start BL_int-12, kept inside the DAC range.
  function automatic logic [DAC_BITS-1:0] lin_start(logic [DAC_BITS-1:0] bl_int);
    if (bl_int < DAC_BITS'(LIN_HALF)) return '0;
    else if (bl_int - DAC_BITS'(LIN_HALF) > LIN_TOP) return LIN_TOP;
    else return bl_int - DAC_BITS'(LIN_HALF);
  endfunction

  logic [ACC_BITS-1:0] half_dist;
  logic [DAC_BITS-1:0] sar_bit;     // the bit tried in this SAR step
  logic [DAC_BITS-1:0] sar_th;      // threshold after this step's decision
  logic                step_end;

  always_comb begin
    half_dist     = (acc >= HALF) ? acc - HALF : HALF - acc;
    sar_bit  = DAC_BITS'(1) << (DAC_BITS - 1 - 32'(cur.idx));
    sar_th   = cur.res_low ? (cur.th & ~sar_bit) : cur.th;
    step_end = (32'(cur.timer) >= STEP_CYCLES - 1) && cur.have_res;

    nxt            = cur;
    nxt.meas_start = 1'b0;

    unique case (cur.st)
      ST_IDLE: begin
        if (start && bypass) begin
          nxt.st         = ST_BYPASS;
          nxt.meas_start = 1'b1;
          nxt.scan_done  = 1'b0;
        end else if (start) begin
          nxt.st        = ST_SAR;
          nxt.timer     = '0;
          nxt.idx       = '0;
          nxt.th        = DAC_BITS'(1) << (DAC_BITS - 1);  // 512
          nxt.have_res  = 1'b0;
          nxt.bl        = '0;
          nxt.nw        = '0;
          nxt.scan_done = 1'b0;
          nxt.cal_valid = 1'b0;
        end
      end

      ST_BYPASS: begin
        if (meas_done) begin
          nxt.st        = ST_IDLE;
          nxt.scan_done = 1'b1;
        end
      end

      ST_SAR, ST_LIN: begin
        if (32'(cur.timer) < STEP_CYCLES - 1) nxt.timer = cur.timer + 1'b1;
        if (32'(cur.timer) == SETTLE_CYCLES) nxt.meas_start = 1'b1;
        if (meas_done) begin
          nxt.have_res = 1'b1;
          nxt.res_low  = acc < HALF;
          if (cur.st == ST_LIN) begin
            if (noise_flag && cur.nw != '1) nxt.nw = cur.nw + 1'b1;
            if (cur.idx == '0 || half_dist < cur.best_dist) begin
              nxt.bl        = cur.th;
              nxt.best_dist = half_dist;
            end
          end
        end
        if (step_end) begin
          nxt.timer    = '0;
          nxt.have_res = 1'b0;
          nxt.idx      = cur.idx + 1'b1;
          if (cur.st == ST_SAR) begin
            if (32'(cur.idx) == DAC_BITS - 1) begin
              // sar_th is BL_int, the rough baseline
              nxt.st  = ST_LIN;
              nxt.idx = '0;
              nxt.th  = lin_start(sar_th);
            end else begin
              nxt.th = sar_th | (sar_bit >> 1);
            end
          end else begin
            if (32'(cur.idx) == LIN_STEPS - 1) begin
              nxt.st        = ST_IDLE;
              nxt.scan_done = 1'b1;
              nxt.cal_valid = 1'b1;
            end else begin
              nxt.th = cur.th + 1'b1;
            end
          end
        end
      end

      default: nxt.st = ST_IDLE;
    endcase
  end

  tmr_reg #(.W($bits(fsm_state_t))) u_state (
    .clk     (clk),
    .rst_n   (rst_n),
    .d       (nxt),
    .q       (cur),
    .mismatch(seu_err)
  );

  // eq. TH = BL + TH_offset, saturated to the DAC range
  logic [DAC_BITS:0] th_applied;
  assign th_applied = {1'b0, cur.bl} + (DAC_BITS + 1)'(th_offset);

  always_comb begin
    if (cur.st == ST_SAR || cur.st == ST_LIN) th_reg = cur.th;
    else if (cur.cal_valid) th_reg = th_applied[DAC_BITS] ? DAC_MAX : th_applied[DAC_BITS-1:0];
    else th_reg = '0;
  end

  assign meas_start = cur.meas_start;
  assign bl         = cur.cal_valid ? cur.bl : '0;
  assign nw         = cur.cal_valid ? cur.nw : '0;
  assign scan_done  = cur.scan_done;
  assign busy       = (cur.st != ST_IDLE);

  // The measurement must start inside the step.
  initial assert (SETTLE_CYCLES < STEP_CYCLES - 1)
    else $error("SETTLE_CYCLES must be below STEP_CYCLES - 1");

endmodule
