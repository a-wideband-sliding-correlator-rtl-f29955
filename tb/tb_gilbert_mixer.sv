// tb_gilbert_mixer: self-checking test of the mixer model.
//
// Random differential RF voltages are applied with each of the four LO drive
// states. The differential IF output must be +GAIN*vrf, -GAIN*vrf or 0 (LO
// legs equal), the two output legs must be balanced around zero, and a large
// input must clip instead of wrapping. A gain of 2 is used so that the gain
// path is exercised.
module tb_gilbert_mixer;
  import sounder_pkg::*;
  logic lo_p, lo_n;
  mv_t  rf_p, rf_n, if_p, if_n;
  int   checks = 0, failures = 0;

  gilbert_mixer #(.GAIN_NUM(2), .GAIN_DEN(1)) dut (
    .lo_p(lo_p), .lo_n(lo_n), .rf_p(rf_p), .rf_n(rf_n), .if_p(if_p), .if_n(if_n));

  initial begin : watchdog
    #1000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 400; i++) begin
      int v, exp_d, got_d;
      lo_p = 1'($urandom); lo_n = 1'($urandom);
      rf_p = mv_t'($signed($urandom_range(0, 4000)) - 2000);
      rf_n = mv_t'($signed($urandom_range(0, 4000)) - 2000);
      #1;
      v = int'(rf_p) - int'(rf_n);
      if (lo_p == lo_n) exp_d = 0;
      else exp_d = lo_p ? 2 * v : -2 * v;
      got_d = int'(if_p) - int'(if_n);
      checks++;
      if (got_d != exp_d) begin
        failures++;
        $display("FAIL lo=%0b%0b vrf=%0d: vif=%0d expected %0d", lo_p, lo_n, v, got_d, exp_d);
      end
      checks++;
      if ((int'(if_p) + int'(if_n)) > 0 || (int'(if_p) + int'(if_n)) < -1) begin
        failures++;
        $display("FAIL unbalanced legs %0d %0d", if_p, if_n);
      end
    end
    // clipping: 2 * 40000 mV differential exceeds the output range
    lo_p = 1'b1; lo_n = 1'b0; rf_p = 20000; rf_n = -20000; #1;
    checks++;
    if (!(if_p > 30000 && if_n < -30000)) begin
      failures++;
      $display("FAIL clipping %0d %0d", if_p, if_n);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
