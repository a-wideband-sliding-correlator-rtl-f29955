// tspc_dff: positive-edge D flip-flop with an active-low asynchronous set.
//
// This is the logic function of the true-single-phase-clock (TSPC) flip-flop
// used for every stage of the PN generators: a P-C2MOS stage, an N-precharge
// stage and an N-C2MOS stage, followed by an output inverter and a PMOS pull-up
// on Q that is driven by /SET. Q takes D at the rising edge of CLK; while /SET is
// low, Q is held at 1 regardless of the clock. The transistor-level circuit,
// its sizing and its dynamic-node behaviour are not modelled; treating the set
// as asynchronous follows from the pull-up acting directly on Q.
//
// Interface: clk (CLK), set_n (/SET), d (D), q (Q).
// Timing: one flip-flop, q valid after each rising clk edge.
module tspc_dff (
  input  logic clk,
  input  logic set_n,
  input  logic d,
  output logic q
);

  always_ff @(posedge clk or negedge set_n) begin
    if (!set_n) q <= 1'b1;
    else        q <= d;
  end

endmodule
