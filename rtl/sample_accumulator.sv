// sample_accumulator: measures the average discriminator output.
//
// A start pulse opens a measurement window of 2^CNT_BITS clock periods
// (32768 periods, 0.82 ms at 40 MHz). On every rising clock edge of the
// window the asynchronous discriminator pulse is sampled through a two-stage
// synchronizer, and every sample that is 1 adds one to an accumulator that
// is one bit wider than the window counter, so that a discriminator that is
// high for the whole window (2^CNT_BITS ones) cannot overflow it. When the
// window counter has run through all its values (the Stop condition), the
// last sample is added and the sum is copied into the Acc register.
//
// Structure (two synchronizer flip-flops, 15-bit counter, 16-bit
// accumulator, Acc register, NoiseFlag and ScanBusy outputs) follows the
// sample accumulator of the calibration scheme. This design's choices: the
// accumulator is cleared by the start pulse; a valid bit travels through two
// stages beside the synchronizer so that exactly the samples taken inside
// the window are added; NoiseFlag is high when Acc lies strictly between 0
// and its maximum 2^CNT_BITS (the threshold sits in the noise transition
// region); a start pulse during a measurement is ignored. All state is
// triplicated (tmr_reg).
//
// Interface:
//   clk        40 MHz clock (gated by the caller when no scan runs)
//   rst_n      asynchronous reset, active low; clears everything to zero
//   start      one-cycle pulse that opens a window
//   disc       discriminator pulse, asynchronous
//   acc        Acc register, result of the last complete window
//   done       one-cycle pulse in the cycle acc takes its new value
//   busy       ScanBusy: high from the cycle after start until done
//   noise_flag NoiseFlag, derived from acc
//   seu_err    some triplicated register copy disagrees with the others
// Timing: if start is high before edge S, samples are taken at edges
// S+1 .. S+2^CNT_BITS, each reaches the accumulator two edges after it was
// taken, and acc/done are updated at edge S+2^CNT_BITS+2.
module sample_accumulator #(
  parameter int unsigned CNT_BITS = threshcal_pkg::CNT_BITS,
  parameter int unsigned ACC_BITS = CNT_BITS + 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic                disc,
  output logic [ACC_BITS-1:0] acc,
  output logic                done,
  output logic                busy,
  output logic                noise_flag,
  output logic                seu_err
);

  localparam logic [ACC_BITS-1:0] ACC_MAX = ACC_BITS'(1) << CNT_BITS;

  typedef struct packed {
    logic [CNT_BITS-1:0] cnt;      // window counter
    logic                running;  // next clock edge takes a sample
    logic                v1;       // valid bit beside synchronizer stage 1
    logic                v2;       // valid bit beside synchronizer stage 2
    logic [ACC_BITS-1:0] accum;    // running sum
    logic [ACC_BITS-1:0] acc_reg;  // Acc register
    logic                done;
  } acc_state_t;

  acc_state_t cur, nxt;
  logic       sample;  // synchronized discriminator pulse

  sync2 u_sync (
    .clk  (clk),
    .rst_n(rst_n),
    .d    (disc),
    .q    (sample)
  );

  always_comb begin
    nxt      = cur;
    nxt.done = 1'b0;
    // Samples move through the synchronizer with their valid bits.
    nxt.v1   = cur.running;
    nxt.v2   = cur.v1;
    if (cur.running) begin
      nxt.cnt = cur.cnt + 1'b1;
      if (cur.cnt == '1) nxt.running = 1'b0;  // Stop
    end
    if (cur.v2) nxt.accum = cur.accum + ACC_BITS'(sample);
    if (cur.v2 && !cur.v1) begin
      nxt.acc_reg = cur.accum + ACC_BITS'(sample);
      nxt.done    = 1'b1;
    end
    if (start && !busy) begin
      nxt.running = 1'b1;
      nxt.cnt     = '0;
      nxt.accum   = '0;
      nxt.v1      = 1'b0;
      nxt.v2      = 1'b0;
    end
  end

  tmr_reg #(.W($bits(acc_state_t))) u_state (
    .clk     (clk),
    .rst_n   (rst_n),
    .d       (nxt),
    .q       (cur),
    .mismatch(seu_err)
  );

  assign acc        = cur.acc_reg;
  assign done       = cur.done;
  assign busy       = cur.running | cur.v1 | cur.v2;
  assign noise_flag = (cur.acc_reg != '0) && (cur.acc_reg != ACC_MAX);

  // The accumulator can never pass the number of samples in a window.
  a_no_overflow : assert property (@(posedge clk) disable iff (!rst_n)
    cur.accum <= ACC_MAX);

endmodule
