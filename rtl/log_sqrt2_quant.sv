// log_sqrt2_quant: fused softmax numerator + log-sqrt2 quantizer.
//
// The softmax numerator of a score x in a row with maximum m is exp(x - m),
// which lies in (0, 1], so the quantizer's scale is 1. Its log-sqrt2 code is
//   Aq = clip(round(-2*log2(exp(x - m))), 0, 15) = clip(round(2*log2(e)*s*(m - x)), 0, 15)
// where s is the real scale of the integer scores. The exponential therefore
// never has to be evaluated: the code is the score distance times one constant.
// qk_scale carries 2*log2(e)*s with 16 fraction bits (a per-layer constant
// computed offline). The unit also returns 2^(-Aq/2) with 16 fraction bits,
// the value that is summed into the softmax denominator l(x).
// Purely combinational. The code width (4 bits) follows the 8/8/4 setting;
// folding the exponential into the code by one multiplication is this design's
// reading of "we apply quantization to the numerator".
module log_sqrt2_quant
  import coq_pkg::*;
(
  input  logic [31:0]      diff,      // m - x, never negative
  input  logic [15:0]      qk_scale,  // 2*log2(e)*s_score, Q0.16
  output logic [ABITS-1:0] aq,        // log-sqrt2 code
  output logic [PFRAC:0]   pval       // 2^(-aq/2), Q1.16
);
  logic [47:0] prod;
  logic [31:0] code;

  always_comb begin
    prod = 48'(diff) * 48'(qk_scale) + 48'(1 << 15);
    code = 32'(prod >> 16);
    aq   = (code > 32'(AQ_MAX)) ? ABITS'(AQ_MAX) : code[ABITS-1:0];
    pval = pow2_half_neg(aq);
  end
endmodule
