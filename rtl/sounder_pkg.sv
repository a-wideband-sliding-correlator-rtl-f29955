// sounder_pkg: types and constants shared by the baseband channel-sounder RTL.
//
// The PN generators are programmable from N_MIN to N_MAX shift-register stages;
// the 3-bit stage selection S<2:0> maps to N = N_MIN + S, so S = 3'b110 gives the
// 11-stage (2047-chip) code. These limits follow the published chip (code length
// 2^N - 1, N from 5 to 12). The signed millivolt type carries the analog levels
// of the mixer models; its width is a choice of this design.
package sounder_pkg;

  localparam int unsigned N_MIN   = 5;   // shortest programmable register
  localparam int unsigned N_MAX   = 12;  // longest programmable register
  localparam int unsigned SEL_W   = 3;   // width of S<2:0>

  // Mode_control: 0 selects the transmitter, 1 the receiver.
  typedef enum logic {
    MODE_TX = 1'b0,
    MODE_RX = 1'b1
  } mode_e;

  // Analog level in millivolts, used by the behavioural mixer model.
  localparam int unsigned MV_W = 16;
  typedef logic signed [MV_W-1:0] mv_t;

  // Supply used to turn logic levels into voltages (1.1 V core supply).
  localparam int VDD_MV = 1100;

endpackage
