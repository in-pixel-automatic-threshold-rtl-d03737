// disc_model: behavioural model of the pixel front end as seen by the
// threshold calibration: threshold DAC, preamplifier with noise and
// discriminator.
//
// Not synthesizable. The preamplifier output is its equivalent baseline
// (given in DAC codes, as a real number so that fractions of a code can be
// modelled) plus Gaussian noise of standard deviation sigma (also in DAC
// codes). A new noise value is drawn every NOISE_PERIOD_PS picoseconds,
// independently of the calibration clock. The discriminator has a
// hysteresis of hyst codes: a low output goes high when baseline + noise
// rises above th + hyst/2, a high output goes low when it falls below
// th - hyst/2; with hyst = 0 the output is simply baseline + noise > th. The
// Gaussian value is the sum of twelve uniform numbers minus six. An ideal
// DAC is assumed: code n is exactly n units.
//
// Interface: th (threshold code from the calibration block), baseline,
// sigma and hyst (set by the testbench at any time) -> disc (asynchronous
// pulse).
module disc_model #(
  parameter int unsigned NOISE_PERIOD_PS = 7300
) (
  input  logic [9:0] th,
  input  real        baseline,
  input  real        sigma,
  input  real        hyst,
  output logic       disc
);

  real noise;

  function automatic real gauss();
    real s;
    s = 0.0;
    for (int i = 0; i < 12; i++) s += real'($urandom() % 65536) / 65536.0;
    return s - 6.0;
  endfunction

  initial begin
    disc = 1'b0;
    forever begin
      #(NOISE_PERIOD_PS * 1ps);
      noise = sigma * gauss();
      if (disc) disc = (baseline + noise > real'(th) - hyst / 2.0);
      else      disc = (baseline + noise > real'(th) + hyst / 2.0);
    end
  end

endmodule
