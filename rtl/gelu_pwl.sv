// gelu_pwl: GELU between the two linear layers of an MLP or expert.
//
// GELU(x) = x * Phi(x) is approximated by x * sigmoid(1.702 x) with a linear
// (hard) sigmoid, clip(0.5 + 0.4375 x, 0, 1), so only one small multiplier and
// a clamp are needed. Input and output are INT8 with 4 fraction bits
// (x_real = x/16). In integers: sig = clip(128 + 7x, 0, 256) (Q.8) and
// y = round(x * sig / 256). Combinational. The paper only shows a GELU unit
// with a piecewise-linear curve; the segment placement and the Q4.4 format
// are this design's choices.
module gelu_pwl (
  input  logic signed [7:0] x,
  output logic signed [7:0] y
);
  logic signed [15:0] sig;
  logic signed [23:0] prod;

  always_comb begin
    sig = 16'sd128 + 16'sd7 * 16'(x);
    if (sig < 16'sd0)   sig = 16'sd0;
    if (sig > 16'sd256) sig = 16'sd256;
    prod = 24'(x) * 24'(sig) + 24'sd128;
    y    = 8'(prod >>> 8);
  end
endmodule
