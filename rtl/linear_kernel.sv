// linear_kernel: unified sparse/dense linear kernel (MLP, expert, gate and
// projection layers).
//
// N_L compute units work on N_L different tokens at once and share every
// weight fetch. For one layer command the rr_router is loaded with the tokens
// to process (all of them in dense mode, the current expert's tokens in sparse
// mode, so one kernel serves MoE and dense layers). Then, per group of N_L
// tokens picked by the router:
//   PREF  the picked tokens' activation rows are copied from the activation
//         buffer into their CUs, one row per cycle;
//   TILE  for each tile of T_OUT output columns the CUs load the biases, then
//   MAC   the weight rows W[k][tile], k = 0..d_in-1, are requested in that
//         order from the weight port (tile-major layout, so the walk runs
//         down one column block) and each returned row is broadcast to all
//         CUs;
//   DRAIN the CUs' accumulators are requantized to INT8, optionally passed
//         through GELU, sent out one CU per cycle and, for the first layer of
//         an MLP/expert, written to the hidden buffer for the second layer.
// Weight traffic per layer is (tokens / N_L) * d_in * d_out / T_OUT words
// of T_OUT bytes, N_L times less than with one CU.
// Weight port: a request (w_req_valid/w_req_ready, address in T_OUT-byte
// words: w_base + tile*d_in + k) and in-order responses (w_rsp_valid, no
// back-pressure). A memory that withholds w_req_ready stalls the kernel. With a
// memory that is always ready the MAC phase takes d_in + latency cycles.
// Biases of the current layer are held in an on-chip bias table written
// through the bias port. Activation buffers: X (D_X lanes, the kernel input,
// written from outside) and H (D_H lanes, written back by the kernel).
module linear_kernel
  import coq_pkg::*;
#(
  parameter int unsigned N_TOK = 197,
  parameter int unsigned D_X   = 192,
  parameter int unsigned D_H   = 768,
  parameter int unsigned N_L   = 4,
  parameter int unsigned T_OUT = 16,
  localparam int unsigned TW  = (N_TOK > 1) ? $clog2(N_TOK) : 1,
  localparam int unsigned KW  = $clog2(D_H),
  localparam int unsigned NTX = D_X / T_OUT,
  localparam int unsigned NTH = D_H / T_OUT,
  localparam int unsigned LW  = (NTH > 1) ? $clog2(NTH) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  // X buffer write port
  input  logic               x_we,
  input  logic [TW-1:0]      x_addr,
  input  logic [NTX-1:0]     x_be,             // one enable per T_OUT lanes
  input  logic signed [7:0]  x_data [D_X],
  // bias table write port
  input  logic               b_we,
  input  logic [KW-1:0]      b_addr,
  input  logic signed [31:0] b_data,
  // command
  input  logic               cmd_valid,
  input  lin_cmd_t           cmd,
  input  logic [N_TOK-1:0]   expert_mask,      // tokens of cmd.expert (sparse)
  output logic               busy,
  output logic               done,
  output lin_cmd_t           cur_cmd,          // command being executed
  // weight memory port
  output logic               w_req_valid,
  input  logic               w_req_ready,
  output logic [23:0]        w_req_addr,
  input  logic               w_rsp_valid,
  input  logic signed [7:0]  w_rsp_data [T_OUT],
  // results
  output logic               o_valid,
  output logic [TW-1:0]      o_tok,
  output logic [LW-1:0]      o_tile,
  output logic signed [7:0]  o_data [T_OUT],
  // event counters for monitoring
  output logic [31:0]        stall_cycles,     // request waiting for w_req_ready
  output logic [31:0]        groups_done
);
  typedef enum logic [2:0] {S_IDLE, S_PICK, S_PREF, S_TILE, S_MAC, S_DRAIN, S_DONE} state_e;
  state_e state;

  localparam int unsigned CW = (N_L > 1) ? $clog2(N_L) : 1;

  lin_cmd_t           c;
  logic [TW-1:0]      g_idx [N_L];
  logic [TW-1:0]      g_addr [N_L];    // activation rows of the picked tokens
  logic [N_L-1:0]     g_vld;
  logic [CW:0]        pc;              // prefetch / drain CU counter
  logic               pref_pend;
  logic [CW-1:0]      pref_cu;
  logic [LW-1:0]      tile;
  logic [KW:0]        k_iss, k_rcv;

  // router
  logic [TW-1:0]  r_idx  [N_L];
  logic [TW-1:0]  r_addr [N_L];
  logic [N_L-1:0] r_vld;
  logic           r_none, r_load, r_adv;

  rr_router #(.N_TOK(N_TOK), .N_L(N_L)) u_router (
    .clk, .rst_n, .load(r_load), .sparse(cmd.mode == MODE_SPARSE), .load_mask(expert_mask),
    .advance(r_adv), .sel_idx(r_idx), .sel_addr(r_addr), .sel_vld(r_vld), .none(r_none));

  // activation buffers
  logic signed [7:0] x_rd [D_X];
  logic signed [7:0] h_rd [D_H];
  logic signed [7:0] h_wr [D_H];
  logic              pref_re, h_we;
  logic [NTH-1:0]    h_be;
  logic [TW-1:0]     pref_addr, h_waddr;

  tok_buffer #(.DEPTH(N_TOK), .WIDTH(D_X), .BE_LANES(T_OUT)) u_xbuf (
    .clk, .wr_en(x_we), .wr_addr(x_addr), .wr_be(x_be), .wr_data(x_data),
    .rd_en(pref_re && !c.src_sel), .rd_addr(pref_addr), .rd_data(x_rd));
  tok_buffer #(.DEPTH(N_TOK), .WIDTH(D_H), .BE_LANES(T_OUT)) u_hbuf (
    .clk, .wr_en(h_we), .wr_addr(h_waddr), .wr_be(h_be), .wr_data(h_wr),
    .rd_en(pref_re && c.src_sel), .rd_addr(pref_addr), .rd_data(h_rd));

  // bias table
  logic signed [31:0] bias_tab [D_H];
  logic signed [31:0] bias_t   [T_OUT];
  always_ff @(posedge clk) if (b_we) bias_tab[b_addr] <= b_data;
  always_comb
    for (int j = 0; j < int'(T_OUT); j++)
      bias_t[j] = bias_tab[KW'(int'(tile) * int'(T_OUT) + j)];

  // compute units
  logic signed [7:0]  pref_row [D_H];
  logic signed [31:0] acc [N_L][T_OUT];
  logic [N_L-1:0]     cu_we;
  logic               ld_bias, mac;

  always_comb
    for (int i = 0; i < int'(D_H); i++)
      pref_row[i] = c.src_sel ? h_rd[i] : ((i < int'(D_X)) ? x_rd[i] : 8'sd0);

  for (genvar u = 0; u < int'(N_L); u++) begin : g_cu
    assign cu_we[u] = pref_pend && (pref_cu == CW'(u));
    linear_cu #(.D_MAX(D_H), .T_OUT(T_OUT)) u_cu (
      .clk, .rst_n, .act_we(cu_we[u]), .act_row(pref_row),
      .ld_bias, .bias(bias_t), .mac, .k(k_rcv[KW-1:0]), .w(w_rsp_data), .acc(acc[u]));
  end

  // output stage: requantizer and GELU on the CU being drained
  logic [CW-1:0]     dcu;
  logic signed [7:0] rq [T_OUT];
  logic signed [7:0] gl [T_OUT];
  logic              drain_fire;

  always_comb dcu = pc[CW-1:0];
  for (genvar j = 0; j < int'(T_OUT); j++) begin : g_out
    requant8 u_rq (.acc(acc[dcu][j]), .mult(c.rq_mult), .shift(c.rq_shift), .q(rq[j]));
    gelu_pwl u_gl (.x(rq[j]), .y(gl[j]));
  end

  always_comb begin
    r_load      = (state == S_IDLE) && cmd_valid;
    r_adv       = (state == S_PICK) && !r_none;
    pref_re     = (state == S_PREF) && (int'(pc) < int'(N_L)) && g_vld[pc[CW-1:0]];
    pref_addr   = g_addr[pc[CW-1:0]];
    ld_bias     = (state == S_TILE);
    mac         = (state == S_MAC) && w_rsp_valid;
    w_req_valid = (state == S_MAC) && (k_iss < (KW+1)'(c.d_in));
    w_req_addr  = c.w_base + 24'(tile) * 24'(c.d_in) + 24'(k_iss);
    drain_fire  = (state == S_DRAIN) && (int'(pc) < int'(N_L)) && g_vld[dcu];
    h_we        = drain_fire && c.wb_en;
    h_waddr     = g_idx[dcu];
    h_be        = NTH'(1) << tile;
    for (int i = 0; i < int'(D_H); i++) h_wr[i] = c.gelu_en ? gl[i % int'(T_OUT)] : rq[i % int'(T_OUT)];
  end

  assign busy    = (state != S_IDLE);
  assign cur_cmd = c;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; c <= '0; g_vld <= '0; pc <= '0; pref_pend <= 1'b0; pref_cu <= '0;
      tile <= '0; k_iss <= '0; k_rcv <= '0; done <= 1'b0; o_valid <= 1'b0; o_tok <= '0;
      o_tile <= '0; stall_cycles <= '0; groups_done <= '0;
      for (int u = 0; u < int'(N_L); u++) begin g_idx[u] <= '0; g_addr[u] <= '0; end
      for (int j = 0; j < int'(T_OUT); j++) o_data[j] <= '0;
    end else begin
      done      <= 1'b0;
      o_valid   <= 1'b0;
      pref_pend <= pref_re;
      pref_cu   <= pc[CW-1:0];
      if (w_req_valid && !w_req_ready) stall_cycles <= stall_cycles + 32'd1;
      case (state)
        S_IDLE: if (cmd_valid) begin
          c     <= cmd;
          state <= S_PICK;
        end
        S_PICK: begin
          if (r_none) begin
            state <= S_DONE;
          end else begin
            g_idx <= r_idx;
            g_addr <= r_addr;
            g_vld <= r_vld;
            pc    <= '0;
            state <= S_PREF;
          end
        end
        S_PREF: begin
          if (int'(pc) < int'(N_L)) begin
            pc <= pc + (CW+1)'(1);
          end else if (!pref_pend) begin
            tile  <= '0;
            state <= S_TILE;
          end
        end
        S_TILE: begin
          k_iss <= '0;
          k_rcv <= '0;
          state <= S_MAC;
        end
        S_MAC: begin
          if (w_req_valid && w_req_ready) k_iss <= k_iss + (KW+1)'(1);
          if (w_rsp_valid) begin
            k_rcv <= k_rcv + (KW+1)'(1);
            if (k_rcv + (KW+1)'(1) == (KW+1)'(c.d_in)) begin
              pc    <= '0;
              state <= S_DRAIN;
            end
          end
        end
        S_DRAIN: begin
          if (int'(pc) < int'(N_L)) begin
            if (drain_fire) begin
              o_valid <= 1'b1;
              o_tok   <= g_idx[dcu];
              o_tile  <= tile;
              o_data  <= c.gelu_en ? gl : rq;
            end
            pc <= pc + (CW+1)'(1);
          end else if ((int'(tile) + 1) * int'(T_OUT) < int'(c.d_out)) begin
            tile  <= tile + LW'(1);
            state <= S_TILE;
          end else begin
            groups_done <= groups_done + 32'd1;
            state <= S_PICK;
          end
        end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (rst_n) begin
      assert (!(w_rsp_valid && state != S_MAC)) else $error("linear_kernel: weight response outside MAC phase");
      assert (!(state == S_IDLE && cmd_valid) || (cmd.d_in != 0 && int'(cmd.d_in) <= int'(D_H)
              && cmd.d_out != 0 && int'(cmd.d_out) <= int'(D_H) && cmd.d_out % T_OUT == 0))
        else $error("linear_kernel: bad layer size");
    end
  end
endmodule
