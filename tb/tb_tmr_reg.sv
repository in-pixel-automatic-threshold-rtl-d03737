// tb_tmr_reg: self-checking testbench of the triplicated register.
//
// Loads random words, checks that q follows d one edge later and that reset
// gives RESET_VAL. Then upsets one copy at a time (by forcing it to a
// different value for a moment between clock edges) and checks that q keeps
// the correct word, that mismatch flags the disagreement, and that the copy
// is corrected by the next clock edge. Finally two copies are upset in the
// same bits, which a majority vote cannot mask: q must then show the upset.
module tb_tmr_reg;

  localparam int unsigned W = 24;
  localparam logic [W-1:0] RV = 24'h5A_C3_0F;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b1;
  always #12.5 clk = ~clk;

  logic [W-1:0] d = '0, q;
  logic         mismatch;

  tmr_reg #(.W(W), .RESET_VAL(RV)) dut (
    .clk(clk), .rst_n(rst_n), .d(d), .q(q), .mismatch(mismatch));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    logic [W-1:0] v, flip;
    #0.5 rst_n = 1'b0;
    #1 check(q == RV && !mismatch, "reset value");
    @(negedge clk) rst_n = 1'b1;
    for (int i = 0; i < 50; i++) begin
      v = W'($urandom());
      d = v;
      @(posedge clk) #1;
      check(q == v && !mismatch, $sformatf("q=%h expected %h", q, v));
      @(negedge clk);
    end
    // single upsets
    for (int c = 0; c < 3; c++) begin
      for (int i = 0; i < 10; i++) begin
        v = W'($urandom());
        d = v;
        @(posedge clk) #1;
        flip = W'($urandom()) | W'(1);
        case (c)
          0: begin force dut.r0 = v ^ flip; #1 release dut.r0; end
          1: begin force dut.r1 = v ^ flip; #1 release dut.r1; end
          default: begin force dut.r2 = v ^ flip; #1 release dut.r2; end
        endcase
        #1 check(q == v, $sformatf("copy %0d upset masked", c));
        check(mismatch, "upset flagged");
        @(posedge clk) #1;
        check(q == v && !mismatch, "upset corrected at next edge");
        @(negedge clk);
      end
    end
    // double upset in the same bits is not masked
    v = W'($urandom());
    d = v;
    @(posedge clk) #1;
    force dut.r0 = ~v;
    force dut.r2 = ~v;
    #1 release dut.r0;
    release dut.r2;
    #1 check(q == ~v, "double upset outvotes the good copy");
    @(negedge clk) rst_n = 1'b0;
    #1 check(q == RV && !mismatch, "asynchronous reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
