// pnsg: programmable pseudo-noise sequence generator (modular shift register).
//
// A chain of NMAX set-able flip-flops (tspc_dff) shifts from stage 1 towards
// stage NMAX. A multiplexer controlled by S<2:0> picks the output of stage
// N = NMIN + S as the feedback bit; that bit re-enters stage 1 and is added
// modulo 2 into the input of stage k+1 wherever SW<k> is 1. This is the modular
// (Galois) form: every adder sits between two stages, so the loop delay is one
// XOR whatever the number of taps. With SW<k> as the coefficient of x^k, the
// generator realises the polynomial x^N + sum(SW<k> x^k) + 1; a primitive
// polynomial gives an m-sequence of 2^N - 1 chips. Example: S = 3'b110 and
// SW<11:1> = 11'b00010010010 give N = 11 and taps [11,8,5,2].
//
// The feedback bit is retimed by one more flip-flop (the Sync-DFF) clocked by
// the same CLK, so the output edges are aligned to the clock. pn_b is the
// complement of pn for a differential mixer drive.
//
// Reset: /SET low sets every flip-flop, Sync-DFF included, to 1, which keeps the
// register out of the all-zero state.
//
// Timing: one chip per rising clk edge; pn lags the feedback bit by one cycle.
// After /SET is released, pn is 1 and then follows the m-sequence from the
// all-ones state.
//
// Choices of this design where the published description is silent: the
// mapping N = 5 + S, the rule "SW<k> enables the adder between stages k and
// k+1" (both fit the published example), and that SW<NMAX> has no effect:
// the highest stage has no stage after it, and the loop tap x^N is always made
// by the multiplexer. Stages beyond N keep shifting but never reach the output.
module pnsg
  import sounder_pkg::*;
#(
  parameter int unsigned NMIN = N_MIN,
  parameter int unsigned NMAX = N_MAX
) (
  input  logic             clk,
  input  logic             set_n,
  input  logic [SEL_W-1:0] s_sel,   // S<2:0>
  input  logic [NMAX:1]    sw,      // SW<NMAX:1>
  output logic             pn,
  output logic             pn_b
);

  logic [NMAX:1] q;     // stage outputs
  logic [NMAX:1] d;     // stage inputs
  logic          fb;    // output of the selected last stage

  // Stage multiplexer: N = NMIN + S, limited to the register length.
  always_comb begin
    int unsigned n;
    n = NMIN + int'(s_sel);
    if (n > NMAX) n = NMAX;
    fb = q[n];
  end

  // Modulo-2 adders between stages, each enabled by its SW bit.
  always_comb begin
    d[1] = fb;
    for (int k = 1; k < NMAX; k++) d[k+1] = q[k] ^ (sw[k] & fb);
  end

  for (genvar k = 1; k <= NMAX; k++) begin : g_stage
    tspc_dff u_dff (.clk(clk), .set_n(set_n), .d(d[k]), .q(q[k]));
  end

  // Sync-DFF: retimes the sequence to the rising edge of CLK.
  tspc_dff u_sync_dff (.clk(clk), .set_n(set_n), .d(fb), .q(pn));

  assign pn_b = ~pn;

endmodule
