// tmr_reg: triple-modular-redundant register with majority voting.
//
// The register is held in three identical copies that all load the same next
// value d on the rising clock edge and reset asynchronously to RESET_VAL. The
// output q is the bitwise two-out-of-three majority of the copies, so a single
// event upset in any one copy never reaches q. Because every user of this
// register computes d from the voted q, an upset copy is overwritten with the
// correct value on the next clock edge (error auto-correction). The flag
// mismatch is high while the three copies disagree.
//
// The calibration circuit is triplicated as a whole; here that is done by
// holding all state of the state machine and the sample accumulator in
// tmr_reg instances. Voting directly after each register and correcting on
// the next edge is this design's choice of triplication style.
//
// Interface: clk, rst_n (asynchronous, active low), d[W-1:0] -> q[W-1:0].
// Timing: q follows d one clock edge later, like a single flip-flop.
module tmr_reg #(
  parameter int unsigned   W         = 1,
  parameter logic [W-1:0]  RESET_VAL = '0
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] d,
  output logic [W-1:0] q,
  output logic         mismatch
);

  logic [W-1:0] r0, r1, r2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) r0 <= RESET_VAL;
    else        r0 <= d;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) r1 <= RESET_VAL;
    else        r1 <= d;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) r2 <= RESET_VAL;
    else        r2 <= d;
  end

  assign q        = (r0 & r1) | (r1 & r2) | (r0 & r2);
  assign mismatch = (r0 != r1) || (r1 != r2);

endmodule
