// coqmoe_top: one encoder layer of the MoE-ViT accelerator.
//
// HEADS fully streaming attention kernels (one per head, run in lockstep)
// write their INT8 output rows, heads side by side, into the X activation
// buffer of the reusable linear kernel. The linear kernel then runs, one
// command at a time, the output projection, the gate layer, the experts' two
// linear layers (sparse mode) or a dense MLP (dense mode). Gate logits are
// diverted into the gating unit, which builds the per-expert token masks the
// router uses in sparse mode and the gate weights; the second layer of every
// expert is diverted into the MoE combiner, which sums the gate-weighted
// expert outputs per token. Commands, buffer loads and the weight memory are
// external: a host (or a command sequencer) issues kernel commands as an
// OpenCL queue would, and the weight port goes to off-chip memory (HBM/DDR).
// LayerNorm, residual additions, patch embedding and the classifier head are
// not part of this block. The host must not write X while attention runs,
// and must clear the gating unit before a gate layer and the combiner before
// the first expert.
module coqmoe_top
  import coq_pkg::*;
#(
  parameter int unsigned N_TOK   = N_TOK_DEF,
  parameter int unsigned HEADS   = HEADS_DEF,
  parameter int unsigned D_HEAD  = D_HEAD_DEF,
  parameter int unsigned D_FF    = D_FF_DEF,
  parameter int unsigned N_EXP   = N_EXP_DEF,
  parameter int unsigned TOPK    = TOPK_DEF,
  parameter int unsigned N_PE    = 8,
  parameter int unsigned N_L     = 4,
  parameter int unsigned T_OUT   = 16,
  parameter int unsigned T_S     = 8,
  localparam int unsigned D_MODEL = HEADS * D_HEAD,
  localparam int unsigned TW  = (N_TOK > 1) ? $clog2(N_TOK) : 1,
  localparam int unsigned HW  = (HEADS > 1) ? $clog2(HEADS) : 1,
  localparam int unsigned KW  = $clog2(D_FF),
  localparam int unsigned NTX = D_MODEL / T_OUT,
  localparam int unsigned NTH = D_FF / T_OUT,
  localparam int unsigned LW  = (NTH > 1) ? $clog2(NTH) : 1,
  localparam int unsigned CLW = (NTX > 1) ? $clog2(NTX) : 1,
  localparam int unsigned EW  = (N_EXP > 1) ? $clog2(N_EXP) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  // attention: Q/K/V load (sel 0/1/2) of one head
  input  logic               a_ld_valid,
  input  logic [HW-1:0]      a_ld_head,
  input  logic [1:0]         a_ld_sel,
  input  logic [TW-1:0]      a_ld_addr,
  input  logic signed [7:0]  a_ld_data [D_HEAD],
  input  logic [15:0]        qk_scale,
  input  logic [15:0]        av_mult,
  input  logic               attn_start,
  output logic               attn_busy,
  output logic               attn_done,
  // host write of the X buffer (LayerNorm output for the MoE/MLP part)
  input  logic               x_we,
  input  logic [TW-1:0]      x_addr,
  input  logic signed [7:0]  x_data [D_MODEL],
  // linear kernel
  input  logic               b_we,
  input  logic [KW-1:0]      b_addr,
  input  logic signed [31:0] b_data,
  input  logic               lin_cmd_valid,
  input  lin_cmd_t           lin_cmd,
  output logic               lin_busy,
  output logic               lin_done,
  output logic               w_req_valid,
  input  logic               w_req_ready,
  output logic [23:0]        w_req_addr,
  input  logic               w_rsp_valid,
  input  logic signed [7:0]  w_rsp_data [T_OUT],
  output logic               o_valid,
  output logic [TW-1:0]      o_tok,
  output logic [LW-1:0]      o_tile,
  output logic signed [7:0]  o_data [T_OUT],
  // gating and MoE combine
  input  logic [15:0]        gate_scale,
  input  logic               gate_clear,
  input  logic               comb_clear,
  input  logic [TW-1:0]      comb_rd_tok,
  input  logic [CLW-1:0]     comb_rd_tile,
  output logic signed [7:0]  comb_rd_data [T_OUT],
  output logic [N_TOK-1:0]   route_mask,       // tokens of lin_cmd.expert
  // monitoring
  output logic [31:0]        stall_cycles,
  output logic [31:0]        groups_done
);
  // ---------------- attention: one kernel per head ----------------
  logic               h_busy [HEADS];
  logic [HEADS-1:0]   h_done, h_ov;
  logic [TW-1:0]      h_tok  [HEADS];
  logic signed [7:0]  h_row  [HEADS][D_HEAD];

  for (genvar h = 0; h < int'(HEADS); h++) begin : g_head
    attention_kernel #(.N_TOK(N_TOK), .D_HEAD(D_HEAD), .N_PE(N_PE), .T_S(T_S)) u_attn (
      .clk, .rst_n,
      .ld_valid(a_ld_valid && a_ld_head == HW'(h)), .ld_sel(a_ld_sel), .ld_addr(a_ld_addr),
      .ld_data(a_ld_data), .qk_scale, .out_mult(av_mult),
      .start(attn_start), .busy(h_busy[h]), .done(h_done[h]),
      .o_valid(h_ov[h]), .o_tok(h_tok[h]), .o_data(h_row[h]));
  end

  assign attn_busy = h_busy[0];
  assign attn_done = h_done[0];

  // X buffer write: attention rows (all heads side by side) or the host
  logic               xw_en;
  logic [TW-1:0]      xw_addr;
  logic signed [7:0]  xw_data [D_MODEL];
  always_comb begin
    xw_en   = h_ov[0] || x_we;
    xw_addr = h_ov[0] ? h_tok[0] : x_addr;
    for (int i = 0; i < int'(D_MODEL); i++)
      xw_data[i] = h_ov[0] ? h_row[i / int'(D_HEAD)][i % int'(D_HEAD)] : x_data[i];
  end

  // ---------------- linear kernel, gating, combine ----------------
  lin_cmd_t          cur;
  logic [N_TOK-1:0]  emask;
  logic [8:0]        gw;
  logic              gate_in, comb_in;

  linear_kernel #(.N_TOK(N_TOK), .D_X(D_MODEL), .D_H(D_FF), .N_L(N_L), .T_OUT(T_OUT)) u_lin (
    .clk, .rst_n,
    .x_we(xw_en), .x_addr(xw_addr), .x_be('1), .x_data(xw_data),
    .b_we, .b_addr, .b_data,
    .cmd_valid(lin_cmd_valid), .cmd(lin_cmd), .expert_mask(emask),
    .busy(lin_busy), .done(lin_done), .cur_cmd(cur),
    .w_req_valid, .w_req_ready, .w_req_addr, .w_rsp_valid, .w_rsp_data,
    .o_valid, .o_tok, .o_tile, .o_data, .stall_cycles, .groups_done);

  assign gate_in = o_valid && cur.to_gate;
  assign comb_in = o_valid && cur.to_comb;
  assign route_mask = emask;

  gating_topk #(.N_TOK(N_TOK), .N_EXP(N_EXP), .TOPK(TOPK)) u_gate (
    .clk, .rst_n, .clear(gate_clear), .gate_scale,
    .in_valid(gate_in), .in_tok(o_tok), .in_logit(o_data[0:N_EXP-1]),
    .mask_exp(EW'(lin_busy ? cur.expert : lin_cmd.expert)), .exp_mask(emask),
    .w_tok(o_tok), .w_exp(EW'(cur.expert)), .w_gate(gw));

  moe_combine #(.N_TOK(N_TOK), .D_MODEL(D_MODEL), .T_OUT(T_OUT)) u_comb (
    .clk, .rst_n, .clear(comb_clear),
    .in_valid(comb_in), .in_tok(o_tok), .in_tile(CLW'(o_tile)), .in_data(o_data), .in_w(gw),
    .rd_tok(comb_rd_tok), .rd_tile(comb_rd_tile), .rd_data(comb_rd_data));

  always_ff @(posedge clk) begin
    if (rst_n) begin
      assert (h_ov == '0 || h_ov == '1) else $error("coqmoe_top: heads out of step");
      assert (!(h_ov[0] && x_we)) else $error("coqmoe_top: host X write during attention output");
    end
  end

  initial begin
    assert (N_EXP <= T_OUT) else $fatal(1, "gate logits must fit one output tile");
    assert (D_MODEL % T_OUT == 0 && D_FF % T_OUT == 0) else $fatal(1, "widths must be tile multiples");
  end
endmodule
