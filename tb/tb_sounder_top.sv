// tb_sounder_top: end-to-end test of the channel-sounder chip.
//
// Four measurement set-ups (sounder_bench) run side by side, each with its own
// transmitter chip, receiver chip, channel and clocks:
//  * N = 5  (S = 0, taps [5,3]),       T_alpha = 1 ns,   T_beta = 1.01 ns   -> gamma = 101
//  * N = 7  (S = 2, taps [7,6]),       T_alpha = 1 ns,   T_beta = 1.0025 ns -> gamma = 401
//  * N = 8  (S = 3, taps [8,6,5,4]),   T_alpha = 1 ns,   T_beta = 1.001 ns  -> gamma = 1001
//  * N = 11 (S = 6, taps [11,8,5,2]),  T_alpha = 2.5 ns (400 MHz), T_beta = 2.505 ns -> gamma = 501,
//    filter window 128 chips.
// Each checks the transmitted m-sequence, the mode switch, the period of the
// synchronization peaks and the positions and I/Q amplitudes of the two
// channel paths in the power delay profile. The result line sums all four.
module tb_sounder_top;
  logic done5, done7, done8, done11;
  int   c5, f5, c7, f7, c8, f8, c11, f11;
  int   checks, failures;

  sounder_bench #(.N(5), .SW(12'b0000_0000_0100), .T_SLOW(1.01),   .W(31))
    u_b5 (.done(done5), .checks(c5), .failures(f5));
  sounder_bench #(.N(7), .SW(12'b0000_0010_0000), .T_SLOW(1.0025), .W(127))
    u_b7 (.done(done7), .checks(c7), .failures(f7));
  sounder_bench #(.N(8), .SW(12'b0000_0011_1000), .T_SLOW(1.001),  .W(255))
    u_b8 (.done(done8), .checks(c8), .failures(f8));
  sounder_bench #(.N(11), .SW({1'b0, 11'b00010010010}), .T_FAST(2.5), .T_SLOW(2.505),
                  .W(128), .D1(20), .D2(50), .PERIODS(2))
    u_b11 (.done(done11), .checks(c11), .failures(f11));

  initial begin : watchdog
    #30_000_000;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", c5 + c7 + c8 + c11, f5 + f7 + f8 + f11 + 1);
    $finish;
  end

  initial begin
    wait (done5 === 1'b1 && done7 === 1'b1 && done8 === 1'b1 && done11 === 1'b1);
    checks   = c5 + c7 + c8 + c11;
    failures = f5 + f7 + f8 + f11;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
