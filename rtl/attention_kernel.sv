// attention_kernel: fully streaming attention kernel for one head.
//
// Q, K and V of the head sit in three on-chip token buffers (Q patches,
// K-Buffer, V-Buffer), filled through the load port. Queries are processed in
// groups of N_PE: each PE takes one query (Fig. 5(a) of the design: queries are
// spread over PEs, keys are broadcast), so every key and value row is read from
// the buffer once per group, whatever N_PE is. Per group:
//   LOADQ  N_PE query rows are read into the PEs' query registers;
//   PASS1  all N_TOK key rows are broadcast; every PE computes its scores,
//          keeps the row maximum and queues the scores;
//   PASS2  each row's safe_softmax turns scores into 4-bit log-sqrt2 codes and
//          sums the denominator l(x);
//   PASS3  all value rows are broadcast; the codes select shift amounts, no
//          multipliers are used;
//   RECIP  one reciprocal of l(x) per row (33-cycle serial divider);
//   FINAL  each row is scaled by recip(l)*out_mult, T_S elements per cycle;
//   OUT    the INT8 rows of the group leave on the output port, one per cycle.
// A group therefore takes about 3*N_TOK + N_PE + D_HEAD/T_S + 40 cycles; the
// testbench checks the exact figure. The passes of one group run one after the
// other here; overlapping them across groups is not done. The output port has
// no back-pressure: the consumer must take one row per cycle in OUT.
module attention_kernel
  import coq_pkg::*;
#(
  parameter int unsigned N_TOK  = 197,
  parameter int unsigned D_HEAD = 64,
  parameter int unsigned N_PE   = 8,
  parameter int unsigned T_S    = 8,
  localparam int unsigned TW = (N_TOK > 1) ? $clog2(N_TOK) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  // load port: sel 0 = Q, 1 = K, 2 = V
  input  logic               ld_valid,
  input  logic [1:0]         ld_sel,
  input  logic [TW-1:0]      ld_addr,
  input  logic signed [7:0]  ld_data [D_HEAD],
  // per-layer constants
  input  logic [15:0]        qk_scale,     // 2*log2(e)*s_q*s_k/sqrt(D_HEAD), Q0.16
  input  logic [15:0]        out_mult,     // s_v / s_out, Q8.8
  // control
  input  logic               start,
  output logic               busy,
  output logic               done,         // one-cycle pulse at the end
  // output rows
  output logic               o_valid,
  output logic [TW-1:0]      o_tok,
  output logic signed [7:0]  o_data [D_HEAD]
);
  typedef enum logic [3:0] {
    S_IDLE, S_LOADQ, S_PASS1, S_DRAIN1, S_PASS2, S_PASS3, S_RECIP, S_FINAL, S_OUT, S_DONE
  } state_e;
  state_e state;

  localparam int unsigned PW = (N_PE > 1) ? $clog2(N_PE) : 1;
  localparam int unsigned CNTW = TW + 2;

  logic [CNTW-1:0] cnt;          // address counter of the current pass
  logic            rd_pend;      // buffer read issued last cycle
  logic [PW-1:0]   rd_pe;        // PE that receives the query being read
  logic [TW-1:0]   grp_base;     // first query of the group
  logic [N_PE-1:0] pe_act;       // PE holds a real query (last group may be short)

  // buffers
  logic signed [7:0] q_rd [D_HEAD];
  logic signed [7:0] k_rd [D_HEAD];
  logic signed [7:0] v_rd [D_HEAD];
  logic              q_re, k_re, v_re;
  logic [TW-1:0]     rd_addr;

  always_comb begin
    rd_addr = cnt[TW-1:0];
    // buffer reads are issued combinationally; data is valid the next cycle
    q_re = (state == S_LOADQ) && int'(cnt) < int'(N_PE) && int'(grp_base) + int'(cnt) < int'(N_TOK);
    k_re = (state == S_PASS1) && int'(cnt) < int'(N_TOK);
    v_re = (state == S_PASS3) && int'(cnt) < int'(N_TOK);
  end

  tok_buffer #(.DEPTH(N_TOK), .WIDTH(D_HEAD), .BE_LANES(D_HEAD)) u_qbuf (
    .clk, .wr_en(ld_valid && ld_sel == 2'd0), .wr_addr(ld_addr), .wr_be(1'b1), .wr_data(ld_data),
    .rd_en(q_re), .rd_addr(TW'(grp_base + rd_addr)), .rd_data(q_rd));
  tok_buffer #(.DEPTH(N_TOK), .WIDTH(D_HEAD), .BE_LANES(D_HEAD)) u_kbuf (
    .clk, .wr_en(ld_valid && ld_sel == 2'd1), .wr_addr(ld_addr), .wr_be(1'b1), .wr_data(ld_data),
    .rd_en(k_re), .rd_addr(rd_addr), .rd_data(k_rd));
  tok_buffer #(.DEPTH(N_TOK), .WIDTH(D_HEAD), .BE_LANES(D_HEAD)) u_vbuf (
    .clk, .wr_en(ld_valid && ld_sel == 2'd2), .wr_addr(ld_addr), .wr_be(1'b1), .wr_data(ld_data),
    .rd_en(v_re), .rd_addr(rd_addr), .rd_data(v_rd));

  // PE array
  logic               q_load   [N_PE];
  logic signed [31:0] score    [N_PE];
  logic signed [31:0] rmax     [N_PE];
  logic [ABITS-1:0]   aq       [N_PE];
  logic [31:0]        lsum     [N_PE];
  logic [32:0]        recip    [N_PE];
  logic [N_PE-1:0]    rdone, pe_busy, ovalid;
  logic signed [7:0]  orow     [N_PE][D_HEAD];
  logic               k_valid, v_valid, p2_step, grp_clear, recip_go, fin_go;

  for (genvar p = 0; p < int'(N_PE); p++) begin : g_pe
    attn_qk_pe #(.D_HEAD(D_HEAD), .N_TOK(N_TOK)) u_qk (
      .clk, .rst_n, .q_load(q_load[p]), .q_in(q_rd),
      .k_valid, .k_in(k_rd),
      .score_pop(p2_step), .score_out(score[p]), .score_empty(), .score_count(),
      .row_max(rmax[p]), .busy(pe_busy[p]));
    safe_softmax #(.N_TOK(N_TOK)) u_sm (
      .clk, .rst_n, .clear(grp_clear), .qk_scale, .row_max(rmax[p]),
      .step(p2_step), .score_in(score[p]),
      .aq_pop(v_valid), .aq_out(aq[p]), .aq_empty(), .l_sum(lsum[p]));
    recip_unit #(.LW(32)) u_rc (
      .clk, .rst_n, .start(recip_go), .l(lsum[p]), .busy(), .done(rdone[p]), .recip(recip[p]));
    av_shift_unit #(.D_HEAD(D_HEAD), .T_S(T_S)) u_av (
      .clk, .rst_n, .clear(grp_clear), .v_valid, .v_in(v_rd), .aq_in(aq[p]),
      .fin_start(fin_go), .recip(recip[p]), .out_mult,
      .out_valid(ovalid[p]), .out_row(orow[p]));
  end

  always_comb begin
    for (int p = 0; p < int'(N_PE); p++)
      q_load[p] = rd_pend && (state == S_LOADQ) && (rd_pe == PW'(p));
  end

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; cnt <= '0; rd_pend <= 1'b0; rd_pe <= '0; grp_base <= '0;
      pe_act <= '0;
      k_valid <= 1'b0; v_valid <= 1'b0; p2_step <= 1'b0; grp_clear <= 1'b0;
      recip_go <= 1'b0; fin_go <= 1'b0; done <= 1'b0; o_valid <= 1'b0; o_tok <= '0;
      for (int i = 0; i < int'(D_HEAD); i++) o_data[i] <= '0;
    end else begin
      grp_clear <= 1'b0;
      recip_go <= 1'b0; fin_go <= 1'b0; done <= 1'b0; o_valid <= 1'b0;
      rd_pend <= q_re;
      rd_pe   <= PW'(cnt);
      k_valid <= k_re;
      v_valid <= v_re;
      p2_step <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          grp_base  <= '0;
          cnt       <= '0;
          grp_clear <= 1'b1;
          state     <= S_LOADQ;
        end
        S_LOADQ: begin
          // read N_PE query rows (fewer in the last group)
          if (q_re) begin
            pe_act[PW'(cnt)] <= 1'b1;
            cnt  <= cnt + CNTW'(1);
          end else if (!rd_pend) begin
            cnt   <= '0;
            state <= S_PASS1;
          end
        end
        S_PASS1: begin
          if (k_re) begin
            cnt  <= cnt + CNTW'(1);
          end else if (!k_valid && pe_busy == '0) begin
            cnt   <= '0;
            state <= S_PASS2;
          end
        end
        S_PASS2: begin
          if (int'(cnt) < int'(N_TOK)) begin
            p2_step <= 1'b1;
            cnt     <= cnt + CNTW'(1);
          end else if (!p2_step) begin
            cnt   <= '0;
            state <= S_PASS3;
          end
        end
        S_PASS3: begin
          if (v_re) begin
            cnt  <= cnt + CNTW'(1);
          end else if (!v_valid) begin
            recip_go <= 1'b1;
            state    <= S_RECIP;
          end
        end
        S_RECIP: if (rdone[0]) begin
          fin_go <= 1'b1;
          state  <= S_FINAL;
        end
        S_FINAL: if (ovalid[0]) begin
          cnt   <= '0;
          state <= S_OUT;
        end
        S_OUT: begin
          if (int'(cnt) < int'(N_PE) && pe_act[PW'(cnt)]) begin
            o_valid <= 1'b1;
            o_tok   <= TW'(grp_base + TW'(cnt));
            o_data  <= orow[PW'(cnt)];
            cnt     <= cnt + CNTW'(1);
          end else begin
            cnt       <= '0;
            pe_act    <= '0;
            grp_clear <= 1'b1;
            if (int'(grp_base) + int'(N_PE) >= int'(N_TOK)) begin
              state <= S_DONE;
            end else begin
              grp_base <= TW'(grp_base + TW'(N_PE));
              state    <= S_LOADQ;
            end
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

  // the PE array runs in lockstep: all rows finish together
  always_ff @(posedge clk) begin
    if (rst_n) begin
      assert (rdone == '0 || rdone == '1) else $error("attention_kernel: reciprocal units out of step");
      assert (ovalid == '0 || ovalid == '1) else $error("attention_kernel: PE rows out of step");
    end
  end
endmodule
