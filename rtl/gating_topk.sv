// gating_topk: back end of the MoE gating network.
//
// The gate logits y*W_g + b_g are computed by the linear kernel in dense mode
// (one output tile of N_EXP INT8 logits per token) and arrive here one token
// per beat. For each token the unit keeps the TOPK largest logits (ties go to
// the lower expert index), and forms the softmax over the kept values:
//   G_j = exp(l_j - l_max) / sum_kept exp(l_i - l_max).
// The exponentials reuse the log-sqrt2 numerator quantizer of the attention
// softmax (gate_scale = 2*log2(e)*s_gate in Q0.16), so each term is
// 2^(-Aq/2); the normalised weights are kept with 8 fraction bits (1.0 = 256).
// Two tables are written: a token mask per expert, which the router loads in
// sparse mode, and the weight of every (token, expert) pair, which the MoE
// combiner reads. clear empties both. One token per cycle, results visible the
// cycle after in_valid. Reusing the log-sqrt2 quantizer for the gate softmax
// and the Q.8 weights are this design's choices.
module gating_topk
  import coq_pkg::*;
#(
  parameter int unsigned N_TOK = 197,
  parameter int unsigned N_EXP = 16,
  parameter int unsigned TOPK  = 4,
  localparam int unsigned TW = (N_TOK > 1) ? $clog2(N_TOK) : 1,
  localparam int unsigned EW = (N_EXP > 1) ? $clog2(N_EXP) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  input  logic [15:0]       gate_scale,
  input  logic              in_valid,
  input  logic [TW-1:0]     in_tok,
  input  logic signed [7:0] in_logit [N_EXP],
  // router side
  input  logic [EW-1:0]     mask_exp,
  output logic [N_TOK-1:0]  exp_mask,         // tokens routed to expert mask_exp
  // combiner side
  input  logic [TW-1:0]     w_tok,
  input  logic [EW-1:0]     w_exp,
  output logic [8:0]        w_gate            // G of (w_tok, w_exp), Q.8
);
  logic [N_TOK-1:0] mask_tab [N_EXP];
  logic [8:0]       gw_tab   [N_TOK][N_EXP];

  logic [EW-1:0]      sel   [TOPK];
  logic signed [7:0]  sval  [TOPK];
  logic [ABITS-1:0]   aq    [TOPK];
  logic [PFRAC:0]     pv    [TOPK];
  logic [PFRAC+4:0]   psum;
  logic [8:0]         wq    [TOPK];

  // top-k by repeated arg-max over the experts not yet chosen
  always_comb begin
    logic [N_EXP-1:0] used;
    used = '0;
    for (int r = 0; r < int'(TOPK); r++) begin
      logic found;
      found   = 1'b0;
      sel[r]  = '0;
      sval[r] = '0;
      for (int e = 0; e < int'(N_EXP); e++) begin
        if (!used[e] && (!found || in_logit[e] > sval[r])) begin
          found   = 1'b1;
          sel[r]  = EW'(e);
          sval[r] = in_logit[e];
        end
      end
      used[sel[r]] = 1'b1;
    end
  end

  for (genvar r = 0; r < int'(TOPK); r++) begin : g_q
    log_sqrt2_quant u_q (
      .diff(32'(16'(sval[0]) - 16'(sval[r]))), .qk_scale(gate_scale),
      .aq(aq[r]), .pval(pv[r]));
  end

  always_comb begin
    psum = '0;
    for (int r = 0; r < int'(TOPK); r++) psum += (PFRAC+5)'(pv[r]);
    for (int r = 0; r < int'(TOPK); r++)
      wq[r] = 9'(((PFRAC+13)'(pv[r]) * 256 + (PFRAC+13)'(psum >> 1)) / (PFRAC+13)'(psum));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int e = 0; e < int'(N_EXP); e++) mask_tab[e] <= '0;
      for (int t = 0; t < int'(N_TOK); t++)
        for (int e = 0; e < int'(N_EXP); e++) gw_tab[t][e] <= '0;
    end else if (clear) begin
      for (int e = 0; e < int'(N_EXP); e++) mask_tab[e] <= '0;
      for (int t = 0; t < int'(N_TOK); t++)
        for (int e = 0; e < int'(N_EXP); e++) gw_tab[t][e] <= '0;
    end else if (in_valid) begin
      for (int e = 0; e < int'(N_EXP); e++) begin
        mask_tab[e][in_tok] <= 1'b0;
        gw_tab[in_tok][e]   <= '0;
      end
      for (int r = 0; r < int'(TOPK); r++) begin
        mask_tab[sel[r]][in_tok] <= 1'b1;
        gw_tab[in_tok][sel[r]]   <= wq[r];
      end
    end
  end

  assign exp_mask = mask_tab[mask_exp];
  assign w_gate   = gw_tab[w_tok][w_exp];
endmodule
