// requant8: per-layer symmetric INT8 requantizer.
//
// Turns a 32-bit accumulator (weights and activations both symmetric INT8, so
// s_x*s_w*(X_q W_q) is the whole product and no zero-point terms appear) into
// the next layer's INT8 code: out = sat8(round(acc * mult / 2^shift)).
// mult/2^shift approximates s_x*s_w/s_out and is a per-layer constant.
// Combinational. Round-half-up and saturation are this design's choices.
module requant8
  import coq_pkg::*;
(
  input  logic signed [31:0] acc,
  input  logic [15:0]        mult,
  input  logic [5:0]         shift,
  output logic signed [7:0]  q
);
  always_comb q = sat_rshift8(64'(acc) * $signed({48'd0, mult}), shift);
endmodule
