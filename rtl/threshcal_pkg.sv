// threshcal_pkg: constants and types shared by the in-pixel threshold
// calibration blocks.
//
// The numbers follow the calibration scheme: a 10-bit threshold DAC, a sample
// window of 2^15 clock periods counted into a 16-bit accumulator, a 4-bit
// noise width, a 6-bit user threshold offset, a 10-step binary successive
// approximation followed by a 25-step linear scan (rough baseline -12..+12),
// and one scan step every 1 ms of the 40 MHz clock (40000 cycles).
// The step settling time (SETTLE_CYCLES) is this design's own choice: the
// scheme only states that the 1 ms step covers one measurement window and
// lets the DAC settle before the measurement starts.
package threshcal_pkg;

  localparam int unsigned DAC_BITS      = 10;     // TH[9:0], BL[9:0], DAC[9:0]
  localparam int unsigned CNT_BITS      = 15;     // sample window counter
  localparam int unsigned NW_BITS       = 4;      // NW[3:0]
  localparam int unsigned OFFSET_BITS   = 6;      // TH_offset[5:0]
  localparam int unsigned LIN_HALF      = 12;     // linear scan BL_int-12..BL_int+12
  localparam int unsigned STEP_CYCLES   = 40000;  // 1 ms at 40 MHz
  localparam int unsigned SETTLE_CYCLES = 7000;   // DAC settling before a window

  // Operating state of the calibration state machine.
  typedef enum logic [2:0] {
    ST_IDLE   = 3'd0,  // waiting for a ScanStart rising edge
    ST_SAR    = 3'd1,  // binary successive approximation, 10 steps
    ST_LIN    = 3'd2,  // upward linear scan, 25 steps
    ST_BYPASS = 3'd3   // one manual measurement at the user DAC code
  } cal_state_e;

endpackage
