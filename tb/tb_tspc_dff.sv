// tb_tspc_dff: self-checking test of the set-able flip-flop.
//
// Drives random data on D, checks that Q takes D at every rising clock edge and
// holds between edges, and that pulling /SET low forces Q to 1 at once, without
// a clock edge, and keeps it there while /SET stays low.
module tb_tspc_dff;
  logic clk = 1'b0, set_n = 1'b0, d = 1'b0, q;
  int   checks = 0, failures = 0;

  tspc_dff dut (.clk(clk), .set_n(set_n), .d(d), .q(q));

  always #5 clk = ~clk;

  task automatic check(input logic got, input logic exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: q=%0b expected %0b at %0t", what, got, exp, $time);
    end
  endtask

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic exp_q;
    #1 check(q, 1'b1, "set at start");
    @(negedge clk); set_n = 1'b1;
    exp_q = 1'b1;
    for (int i = 0; i < 400; i++) begin
      d = 1'($urandom);
      @(posedge clk); #1;
      exp_q = d;
      check(q, exp_q, "capture on rising edge");
      // a change of D between edges must not reach Q
      d = ~d; #2;
      check(q, exp_q, "hold between edges");
      if (i % 37 == 20) begin
        // asynchronous set in the middle of the low clock phase
        @(negedge clk); d = 1'b0; #1 set_n = 1'b0; #1;
        check(q, 1'b1, "asynchronous set");
        @(posedge clk); #1;
        check(q, 1'b1, "set dominates clock");
        @(negedge clk); set_n = 1'b1;
        @(posedge clk); #1;
        check(q, 1'b0, "capture after set released");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
