// tb_mode_switch: exhaustive test of the Mode_control routing.
//
// All four combinations of mode and input bit are applied, each with a random
// settle time, and all three outputs are compared with the expected routing:
// transmitter mode drives tx_out only, receiver mode drives the differential
// receiver pair only.
module tb_mode_switch;
  import sounder_pkg::*;
  mode_e mode;
  logic  pn_in, tx_out, rx_p, rx_n;
  int    checks = 0, failures = 0;

  mode_switch dut (.mode(mode), .pn_in(pn_in), .tx_out(tx_out), .rx_p(rx_p), .rx_n(rx_n));

  initial begin : watchdog
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int rep = 0; rep < 20; rep++) begin
      for (int m = 0; m < 2; m++) begin
        for (int b = 0; b < 2; b++) begin
          logic e_tx, e_p, e_n;
          mode  = mode_e'(m);
          pn_in = 1'(b);
          #($urandom_range(1, 5));
          e_tx = (m == 0) ? 1'(b) : 1'b0;
          e_p  = (m == 1) ? 1'(b) : 1'b0;
          e_n  = (m == 1) ? 1'(~b) : 1'b0;
          checks++;
          if (tx_out !== e_tx || rx_p !== e_p || rx_n !== e_n) begin
            failures++;
            $display("FAIL mode=%0d in=%0d: tx=%0b rx=%0b%0b expected %0b %0b%0b",
                     m, b, tx_out, rx_p, rx_n, e_tx, e_p, e_n);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
