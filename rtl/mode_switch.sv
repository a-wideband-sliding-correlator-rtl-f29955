// mode_switch: Mode_control routing of the PNSG 1 sequence.
//
// With Mode_control = 0 (transmitter) the sequence s(t) drives the PN-sequence
// output and the receiver branch is open. With Mode_control = 1 (receiver) the
// sequence drives the synchronization mixer and the transmit output is quiet.
// The receiver branch is a differential pair (rx_p, rx_n): s(t) and its
// complement when selected, both low when open, so the following double-
// balanced mixer sees zero differential input and produces no output.
//
// Which output each mode selects follows the published block diagram; holding
// the unselected output low and the differential form of the receiver branch
// are choices of this design. Purely combinational, no clock.
module mode_switch
  import sounder_pkg::*;
(
  input  mode_e mode,     // Mode_control
  input  logic  pn_in,    // s(t) from PNSG 1
  output logic  tx_out,   // PN sequence (transmitter)
  output logic  rx_p,     // to the sync mixer, true leg
  output logic  rx_n      // to the sync mixer, complement leg
);

  always_comb begin
    tx_out = 1'b0;
    rx_p   = 1'b0;
    rx_n   = 1'b0;
    unique case (mode)
      MODE_TX: tx_out = pn_in;
      MODE_RX: begin
        rx_p = pn_in;
        rx_n = ~pn_in;
      end
    endcase
  end

endmodule
