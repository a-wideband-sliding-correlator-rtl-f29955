// corr_lpf_model: sampled stand-in for the board-level low-pass filter.
//
// The channel sounder's mixer outputs are low-pass filtered off chip. Here the
// filter is a moving sum over the last W samples of the differential mixer
// output, taken on the falling edge of the sampling clock. For an m-sequence
// correlation with W equal to the code length this is the exact correlation
// integral; with a shorter window it is a slightly noisier estimate. The sum is
// in millivolt-samples and starts at zero.
module corr_lpf_model #(
  parameter int W = 31
) (
  input  logic   clk,
  input  int     x,
  output longint y
);
  int hist [W];
  int idx = 0;

  initial begin
    y = 0;
    foreach (hist[i]) hist[i] = 0;
  end

  always @(negedge clk) begin
    y         = y + longint'(x) - longint'(hist[idx]);
    hist[idx] = x;
    idx       = (idx == W - 1) ? 0 : idx + 1;
  end
endmodule
