// tb_sounder_full: one complete measurement with the published settings.
//
// The chip is used exactly as in the reported synchronization measurement:
// an 11-stage code, S = 3'b110 and SW<11:1> = 11'b00010010010 (taps
// [11,8,5,2]), a 1 GHz fast clock and a 999.95 MHz slow clock, so the sliding
// factor is gamma = 20000 and the synchronization signal should repeat every
// 2047 * 20000 ns = 40.94 ms. The low-pass filter stand-in integrates over a
// full code period (2047 chips). The channel has two paths, 20 ns and 50 ns,
// which must appear 0.4 ms and 1.0 ms after each sync peak. The transmitter
// phase also checks the 11-stage run-length histogram.
module tb_sounder_full;
  logic done;
  int   checks, failures;

  sounder_bench #(
    .N(11), .SW({1'b0, 11'b00010010010}),
    .T_FAST(1.0), .T_SLOW(1.00005), .W(2047),
    .D1(20), .D2(50), .PERIODS(2)
  ) u_bench (.done(done), .checks(checks), .failures(failures));

  initial begin : watchdog
    #200_000_000;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    wait (done === 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
