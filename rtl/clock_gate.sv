// clock_gate: latch-based clock gate for the calibration logic.
//
// The 40 MHz clock of the calibration circuit runs only while a calibration
// or a bypass measurement is in progress, which saves power and keeps the
// digital switching noise away from the front end the rest of the time.
// The enable is captured by a latch that is transparent while the clock is
// low and the clock is ANDed with the latched enable, so the gated clock
// never carries a shortened pulse when the enable changes. This is the usual
// integrated clock-gating cell; in a standard-cell flow it is replaced by
// the library's cell. The latch reported by lint tools is this intended
// latch.
//
// Interface: clk (free-running), en (synchronous to clk, may change after a
// rising edge) -> gclk. Timing: a rising edge of clk reaches gclk if en was
// high just before that edge.
module clock_gate (
  input  logic clk,
  input  logic en,
  output logic gclk
);

  logic en_lat;

  always_latch begin
    if (!clk) en_lat = en;
  end

  assign gclk = clk & en_lat;

endmodule
