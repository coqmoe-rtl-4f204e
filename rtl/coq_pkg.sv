// coq_pkg: shared constants, types and arithmetic helpers of the CoQMoE-style
// accelerator.
//
// All activations and weights are INT8 with per-layer symmetric scales, as the
// quantization scheme prescribes; attention probabilities are 4-bit log-sqrt2
// codes. The fixed-point formats below (16 fraction bits for probability
// values, 8 fraction bits for pre-shifted V) are choices of this design, not
// numbers from the paper.
package coq_pkg;

  // ViT-Tiny / M3ViT-T encoder sizes (model sizes, not accelerator sizes).
  localparam int unsigned N_TOK_DEF   = 197;  // 196 patches + class token
  localparam int unsigned D_MODEL_DEF = 192;
  localparam int unsigned HEADS_DEF   = 3;
  localparam int unsigned D_HEAD_DEF  = 64;
  localparam int unsigned D_FF_DEF    = 768;  // 4*D
  localparam int unsigned N_EXP_DEF   = 16;
  localparam int unsigned TOPK_DEF    = 4;

  // Attention-map bit width (W/A/Attn = 8/8/4).
  localparam int unsigned ABITS = 4;
  localparam int unsigned AQ_MAX = (1 << ABITS) - 1;

  // Fixed-point formats.
  localparam int unsigned PFRAC  = 16;      // fraction bits of 2^(-Aq/2)
  localparam int unsigned VFRAC  = 8;       // fraction bits kept when V is shifted
  localparam int unsigned INV_SQRT2_Q16 = 46341;  // round(2^16 / sqrt(2))
  localparam int unsigned SQRT2_Q14     = 23170;  // round(2^14 * sqrt(2))

  // Linear-kernel layer modes.
  typedef enum logic [1:0] {
    MODE_DENSE  = 2'd0,   // every token (MLP, projection, gate, QKV)
    MODE_SPARSE = 2'd1    // only the tokens routed to the current expert
  } lin_mode_e;

  // One layer command of the reusable linear kernel.
  typedef struct packed {
    lin_mode_e   mode;
    logic [3:0]  expert;     // expert whose token mask is used in sparse mode
    logic [11:0] d_in;       // input features of this layer
    logic [11:0] d_out;      // output features (multiple of T_OUT)
    logic        src_sel;    // activation buffer read: 0 = X, 1 = hidden
    logic        wb_en;      // write results back to the hidden buffer
    logic        gelu_en;    // apply GELU to the requantized outputs
    logic        to_gate;    // outputs are gate logits: feed the gating unit
    logic        to_comb;    // outputs are expert results: feed the MoE combiner
    logic [23:0] w_base;     // first weight word of this layer in memory
    logic [15:0] rq_mult;    // requantization multiplier
    logic [5:0]  rq_shift;   // requantization right shift
  } lin_cmd_t;

  // 2^(-aq/2) with PFRAC fraction bits: even aq = 2k gives 2^-k, odd
  // aq = 2k+1 gives 2^-k / sqrt(2).
  function automatic logic [PFRAC:0] pow2_half_neg(input logic [ABITS-1:0] aq);
    logic [PFRAC:0] base;
    base = aq[0] ? (PFRAC+1)'(INV_SQRT2_Q16) : (PFRAC+1)'(1 << PFRAC);
    return base >> (aq >> 1);
  endfunction

  // Round-half-up arithmetic right shift then saturation to INT8.
  function automatic logic signed [7:0] sat_rshift8(input logic signed [63:0] v,
                                                    input logic [5:0] sh);
    logic signed [63:0] r;
    r = (sh == 0) ? v : ((v + (64'sd1 <<< (sh - 1))) >>> sh);
    if (r > 64'sd127)       return 8'sd127;
    else if (r < -64'sd128) return -8'sd128;
    else                    return r[7:0];
  endfunction

endpackage
