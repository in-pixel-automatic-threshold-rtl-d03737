// scan_start_detect: rising-edge detector for the ScanStart command.
//
// ScanStart comes from the slow-control register and is treated as
// asynchronous to the 40 MHz clock. It is brought into the clock domain by a
// two-stage synchronizer and compared with its value one cycle earlier; a
// low-to-high change gives a one-cycle start pulse. This block runs on the
// free-running clock, so that it sees ScanStart fall and rise again while
// the rest of the calibration logic has its clock gated off; its pulse also
// switches the gated clock on.
//
// After reset the detector first waits until the synchronizer holds the
// real ScanStart level, so that a ScanStart still high when reset is
// released is not taken for a rising edge: the scan stays suspended until
// ScanStart is lowered and raised again.
//
// That a rising edge of ScanStart launches the calibration follows the
// scheme; the synchronizer, the wait after reset and the registered
// one-cycle pulse are this design's choice. The state is triplicated
// (tmr_reg) like the rest of the calibration logic; the synchronizer is not.
//
// Interface: clk, rst_n (asynchronous, active low), scan_start -> start;
// seu_err is high while the triplicated copies disagree.
// Timing: start is high for one cycle, three to four clock edges after
// scan_start rises; no pulse in the first four edges after reset.
module scan_start_detect (
  input  logic clk,
  input  logic rst_n,
  input  logic scan_start,
  output logic start,
  output logic seu_err
);

  typedef struct packed {
    logic       s_prev;  // synchronized ScanStart one cycle earlier
    logic [1:0] fill;    // edges since reset, up to 3: synchronizer filled
    logic       start;
  } det_state_t;

  logic       s_sync;
  det_state_t cur, nxt;

  sync2 u_sync (
    .clk  (clk),
    .rst_n(rst_n),
    .d    (scan_start),
    .q    (s_sync)
  );

  always_comb begin
    nxt        = cur;
    nxt.s_prev = s_sync;
    nxt.start  = 1'b0;
    if (cur.fill != 2'd3) nxt.fill = cur.fill + 2'd1;
    else                  nxt.start = s_sync & ~cur.s_prev;
  end

  tmr_reg #(.W($bits(det_state_t))) u_state (
    .clk     (clk),
    .rst_n   (rst_n),
    .d       (nxt),
    .q       (cur),
    .mismatch(seu_err)
  );

  assign start = cur.start;

endmodule
