// sync2: two-stage flip-flop synchronizer.
//
// Brings the asynchronous discriminator pulse into the 40 MHz clock domain.
// The first flip-flop may go metastable when the input changes near a clock
// edge; the second gives it one clock period to resolve. The output is the
// input sampled at a clock edge and delayed by two clock periods.
//
// Interface: clk, rst_n (asynchronous, active low, clears both stages),
// d (asynchronous) -> q (synchronous).
module sync2 (
  input  logic clk,
  input  logic rst_n,
  input  logic d,
  output logic q
);

  logic s1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1 <= 1'b0;
      q  <= 1'b0;
    end else begin
      s1 <= d;
      q  <= s1;
    end
  end

endmodule
