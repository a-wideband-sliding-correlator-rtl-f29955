// sounder_top: baseband chip of the sliding-correlator channel sounder.
//
// Two programmable PN generators share one set of programming words (S<2:0>,
// SW<12:1>) and one reset, but run on separate clocks: PNSG 1 on the fast
// clock alpha, PNSG 2 on the slightly slower clock beta.
//
//  * Mode_control = 0 (transmitter): PNSG 1 drives pn_tx, the spread-spectrum
//    sounding sequence s(t). The sync path is open.
//  * Mode_control = 1 (receiver): PNSG 1 reproduces the transmitter's s(t) on
//    the receiver's own alpha clock and feeds the sync mixer. PNSG 2 produces
//    r(t) at beta. Three double-balanced mixers, all with r(t) on their LO pair,
//    form
//      sync  = s(t)      * r(t)  (timing reference, zero multipath delay)
//      rs_i  = I IF input * r(t) (in-phase correlation)
//      rs_q  = Q IF input * r(t) (quadrature correlation)
//    Because beta < alpha, r(t) slides past the received code by one chip
//    every gamma = alpha/(alpha-beta) chips. After off-chip low-pass filtering
//    each product traces the correlation of the two codes, i.e. the power delay
//    profile stretched in time by gamma. The sync peak marks zero delay.
//
// The low-pass filters sit on the board, so the mixer outputs leave the chip
// unfiltered. Analog levels are signed millivolts (sounder_pkg::mv_t); the sync
// mixer's RF pair is s(t) turned into rail levels, 0 or VDD_MV per leg.
//
// The block diagram, the mode encoding and the clocks follow the published
// chip. Sharing the programming words between the two generators, an active-low
// reset driving every /SET directly, and feeding r(t) to the LO side of each
// mixer are choices of this design.
//
// Timing: one chip per rising clk_fast edge on pn_tx; the mixer outputs are
// combinational functions of the generator outputs and the IF inputs.
module sounder_top
  import sounder_pkg::*;
(
  input  logic              clk_fast,   // alpha
  input  logic              clk_slow,   // beta
  input  logic              reset_n,    // Reset, active low, to every /SET
  input  mode_e             mode,       // Mode_control
  input  logic [SEL_W-1:0]  s_sel,      // S<2:0>
  input  logic [N_MAX:1]    sw,         // SW<12:1>
  input  mv_t               if_i_p,     // in-phase IF input s(t-t0)
  input  mv_t               if_i_n,
  input  mv_t               if_q_p,     // quadrature IF input
  input  mv_t               if_q_n,
  output logic              pn_tx,      // PN sequence (transmitter)
  output mv_t               sync_p,     // synchronization mixer output
  output mv_t               sync_n,
  output mv_t               rs_i_p,     // in-phase correlation mixer output
  output mv_t               rs_i_n,
  output mv_t               rs_q_p,     // quadrature correlation mixer output
  output mv_t               rs_q_n
);

  logic s_t;              // s(t), PNSG 1
  logic r_t, r_t_b;       // r(t), PNSG 2
  logic rx_p, rx_n;       // switched s(t) towards the sync mixer
  mv_t  s_rf_p, s_rf_n;   // s(t) as rail voltages

  pnsg u_pnsg1 (
    .clk   (clk_fast),
    .set_n (reset_n),
    .s_sel (s_sel),
    .sw    (sw),
    .pn    (s_t),
    .pn_b  ()             // PNSG 1 drives single-ended loads only
  );

  pnsg u_pnsg2 (
    .clk   (clk_slow),
    .set_n (reset_n),
    .s_sel (s_sel),
    .sw    (sw),
    .pn    (r_t),
    .pn_b  (r_t_b)
  );

  mode_switch u_mode_switch (
    .mode   (mode),
    .pn_in  (s_t),
    .tx_out (pn_tx),
    .rx_p   (rx_p),
    .rx_n   (rx_n)
  );

  assign s_rf_p = rx_p ? mv_t'(VDD_MV) : '0;
  assign s_rf_n = rx_n ? mv_t'(VDD_MV) : '0;

  // Mixer 1: synchronization, s(t) x r(t).
  gilbert_mixer u_mixer_sync (
    .lo_p (r_t), .lo_n (r_t_b),
    .rf_p (s_rf_p), .rf_n (s_rf_n),
    .if_p (sync_p), .if_n (sync_n)
  );

  // Mixer 2: in-phase correlation, s(t-t0)_I x r(t).
  gilbert_mixer u_mixer_i (
    .lo_p (r_t), .lo_n (r_t_b),
    .rf_p (if_i_p), .rf_n (if_i_n),
    .if_p (rs_i_p), .if_n (rs_i_n)
  );

  // Mixer 3: quadrature correlation, s(t-t0)_Q x r(t).
  gilbert_mixer u_mixer_q (
    .lo_p (r_t), .lo_n (r_t_b),
    .rf_p (if_q_p), .rf_n (if_q_n),
    .if_p (rs_q_p), .if_n (rs_q_n)
  );

endmodule
