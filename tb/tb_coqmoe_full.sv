// tb_coqmoe_full: end-to-end test of one encoder layer on coqmoe_top with every parameter at its default (ViT-Tiny sizes: 197 tokens, 3 heads of 64, hidden 768, 16 experts, top-4).
//
// Flow: load Q/K/V of every head, run attention (rows land in the X buffer),
// run the output projection (dense), load a LayerNorm output into X, run the
// gate layer, then both linear layers of every expert in sparse mode with the
// MoE combiner, and finally a dense MLP (mode switch back to dense). The
// weight memory is modelled behaviourally: weights are a hash of address and
// lane, returned two cycles after a request, and the memory withholds ready
// at random so the kernel stalls. Attention is checked against real-valued
// softmax on the quantized numerators (within 2 LSB), all linear results
// exactly against an integer reference, and the combined MoE output exactly.
// Each mechanism (stall, dense and sparse layers, GELU write-back, an expert
// with no tokens, a short query group, a short router group, gating, combine)
// is counted and must occur.
module tb_coqmoe_full;
  import coq_pkg::*;
  localparam int N = 197, HEADS = 3, DHD = 64, DFF = 768, E = 16, K = 4;
  localparam int NPE = 8, NL = 4, T = 16, TS = 8;
  localparam int D = HEADS * DHD, LAT = 2;
  localparam int TW = $clog2(N), HW = (HEADS > 1) ? $clog2(HEADS) : 1, KW = $clog2(DFF);
  localparam int NTH = DFF / T, LW = $clog2(NTH), NTX = D / T, CLW = (NTX > 1) ? $clog2(NTX) : 1;

  logic clk = 0, rst_n = 1;
  logic a_ld_valid = 0;
  logic [HW-1:0] a_ld_head;
  logic [1:0] a_ld_sel;
  logic [TW-1:0] a_ld_addr;
  logic signed [7:0] a_ld_data [DHD];
  logic [15:0] qk_scale, av_mult, gate_scale;
  logic attn_start = 0, attn_busy, attn_done;
  logic x_we = 0;
  logic [TW-1:0] x_addr;
  logic signed [7:0] x_data [D];
  logic b_we = 0;
  logic [KW-1:0] b_addr;
  logic signed [31:0] b_data;
  logic lin_cmd_valid = 0, lin_busy, lin_done;
  lin_cmd_t lin_cmd;
  logic w_req_valid, w_req_ready, w_rsp_valid;
  logic [23:0] w_req_addr;
  logic signed [7:0] w_rsp_data [T];
  logic o_valid;
  logic [TW-1:0] o_tok;
  logic [LW-1:0] o_tile;
  logic signed [7:0] o_data [T];
  logic gate_clear = 0, comb_clear = 0;
  logic [TW-1:0] comb_rd_tok;
  logic [CLW-1:0] comb_rd_tile;
  logic signed [7:0] comb_rd_data [T];
  logic [N-1:0] route_mask;
  logic [31:0] stall_cycles, groups_done;

  coqmoe_top dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  // mechanism counters
  int n_stall_layers = 0, n_dense = 0, n_sparse = 0, n_gelu_wb = 0, n_empty_expert = 0;
  int n_short_qgroup = 0, n_short_rgroup = 0, n_gate_tokens = 0, n_comb_beats = 0;

  int Qm [HEADS][N][DHD];
  int Km [HEADS][N][DHD];
  int Vm [HEADS][N][DHD];
  int A [N][D];          // attention rows seen on the X write port
  int Xr [N][D];
  int Hr [N][DFF];
  int B [DFF];
  int expv [N][DFF];
  bit got [N][DFF];
  bit tok_on [N];
  int logits [N][T];
  int gw [N][E];
  longint comb_ref [N][D];
  bit cap_logits, cap_attn;

  function automatic int wval(int addr, int lane);
    int h;
    h = (addr * 1103515245 + lane * 12345 + 777) ^ (addr >>> 3);
    return ((h >>> 8) & 255) - 128;
  endfunction

  // weight memory model
  int pipe_addr [LAT];
  bit pipe_v [LAT];
  always @(negedge clk) w_req_ready <= ($urandom_range(0, 7) != 0);
  always @(posedge clk) begin
    for (int i = LAT - 1; i > 0; i--) begin pipe_v[i] <= pipe_v[i-1]; pipe_addr[i] <= pipe_addr[i-1]; end
    pipe_v[0] <= w_req_valid && w_req_ready;
    pipe_addr[0] <= int'(w_req_addr);
  end
  always_comb begin
    w_rsp_valid = pipe_v[LAT-1];
    for (int j = 0; j < T; j++) w_rsp_data[j] = 8'(wval(pipe_addr[LAT-1], j));
  end

  // attention rows written into X
  always @(posedge clk) begin
    if (rst_n && cap_attn && dut.h_ov[0])
      for (int i = 0; i < D; i++) A[dut.h_tok[0]][i] = int'(dut.xw_data[i]);
  end

  // linear output monitor
  always @(posedge clk) begin
    if (rst_n && o_valid) begin
      for (int j = 0; j < T; j++) begin
        int col;
        col = int'(o_tile) * T + j;
        if (cap_logits) logits[o_tok][j] = int'(o_data[j]);
        checks++;
        if (!tok_on[o_tok]) begin failures++; $display("FAIL token %0d not routed", o_tok); end
        else if (int'(o_data[j]) != expv[o_tok][col]) begin
          failures++;
          if (failures < 10) $display("FAIL tok %0d col %0d got %0d exp %0d", o_tok, col, o_data[j], expv[o_tok][col]);
        end
        got[o_tok][col] = 1;
      end
      if (dut.cur.to_gate) n_gate_tokens++;
      if (dut.cur.to_comb) n_comb_beats++;
    end
  end

  function automatic int rq(longint acc, int mult, int sh, bit gelu);
    longint r;
    int y, sig;
    r = (acc * mult + (64'sd1 <<< (sh - 1))) >>> sh;
    y = (r > 127) ? 127 : (r < -128) ? -128 : int'(r);
    if (gelu) begin
      sig = 128 + 7 * y;
      if (sig < 0) sig = 0;
      if (sig > 256) sig = 256;
      y = (y * sig + 128) >>> 8;
    end
    return y;
  endfunction

  // runs one linear-kernel command and checks it; src: 0 = X (Xr), 1 = H
  task automatic run_layer(input bit sparse, input int ex, input int din, input int dout,
                           input bit src_h, input bit wb, input bit gelu, input bit to_gate,
                           input bit to_comb, input int wbase, input int bias_lo, input int bias_hi);
    int mult, sh, ntok, st0;
    mult = (din > D) ? 60 : 200; sh = 14;
    for (int c = 0; c < dout; c++) begin
      B[c] = $urandom_range(0, 4000) - 2000;
      if (to_gate && c == bias_lo) B[c] = -32'sd2000000;      // this expert is never chosen
      @(negedge clk); b_we = 1; b_addr = KW'(c); b_data = B[c];
    end
    @(negedge clk); b_we = 0;
    ntok = 0;
    for (int t = 0; t < N; t++) begin
      tok_on[t] = sparse ? (gw[t][ex] != 0 || route_mask_ref(t, ex)) : 1'b1;
      if (tok_on[t]) ntok++;
      if (tok_on[t]) for (int c = 0; c < dout; c++) begin
        longint acc;
        acc = B[c];
        for (int k = 0; k < din; k++)
          acc += longint'(src_h ? Hr[t][k] : Xr[t][k]) * longint'(wval(wbase + (c / T) * din + k, c % T));
        expv[t][c] = rq(acc, mult, sh, gelu);
        got[t][c] = 0;
      end
    end
    if (sparse && ntok == 0) n_empty_expert++;
    if (ntok % NL != 0) n_short_rgroup++;
    if (sparse) n_sparse++; else n_dense++;
    if (wb && gelu) n_gelu_wb++;
    lin_cmd = '0;
    lin_cmd.mode = sparse ? MODE_SPARSE : MODE_DENSE;
    lin_cmd.expert = 4'(ex);
    lin_cmd.d_in = 12'(din); lin_cmd.d_out = 12'(dout); lin_cmd.src_sel = src_h;
    lin_cmd.wb_en = wb; lin_cmd.gelu_en = gelu; lin_cmd.to_gate = to_gate; lin_cmd.to_comb = to_comb;
    lin_cmd.rq_mult = 16'(mult); lin_cmd.rq_shift = 6'(sh); lin_cmd.w_base = 24'(wbase);
    st0 = int'(stall_cycles);
    @(negedge clk); lin_cmd_valid = 1;
    @(negedge clk); lin_cmd_valid = 0;
    while (!lin_done) @(negedge clk);
    if (int'(stall_cycles) > st0) n_stall_layers++;
    for (int t = 0; t < N; t++) if (tok_on[t]) for (int c = 0; c < dout; c++) begin
      checks++;
      if (!got[t][c]) begin failures++; $display("FAIL missing output t%0d c%0d", t, c); end
      if (wb) Hr[t][c] = expv[t][c];
      if (to_comb) comb_ref[t][c] += longint'(expv[t][c]) * longint'(gw[t][ex]);
    end
  endtask

  bit routed [N][E];
  function automatic bit route_mask_ref(int t, int ex);
    return routed[t][ex];
  endfunction

  // gating reference: top-K by value (lower index on ties), softmax of the
  // log-sqrt2-quantized exponentials with 8 fraction bits
  task automatic gate_ref();
    for (int t = 0; t < N; t++) begin
      int sel [K];
      int pv [K];
      int ps;
      for (int e = 0; e < E; e++) begin routed[t][e] = 0; gw[t][e] = 0; end
      for (int k = 0; k < K; k++) begin
        int best;
        best = -1;
        for (int e = 0; e < E; e++)
          if (!routed[t][e] && (best < 0 || logits[t][e] > logits[t][best])) best = e;
        sel[k] = best; routed[t][best] = 1;
      end
      ps = 0;
      for (int k = 0; k < K; k++) begin
        longint code;
        int a;
        code = (longint'(logits[t][sel[0]] - logits[t][sel[k]]) * longint'(gate_scale) + 32768) >>> 16;
        a = (code > 15) ? 15 : int'(code);
        pv[k] = ((a % 2) ? 46341 : 65536) >>> (a / 2);
        ps += pv[k];
      end
      for (int k = 0; k < K; k++) gw[t][sel[k]] = (pv[k] * 256 + ps / 2) / ps;
    end
  endtask

  function automatic real attn_ref(int h, int i, int d);
    int s [N];
    int m;
    real num, den;
    m = -1000000000;
    for (int j = 0; j < N; j++) begin
      s[j] = 0;
      for (int t = 0; t < DHD; t++) s[j] += Qm[h][i][t] * Km[h][j][t];
      if (s[j] > m) m = s[j];
    end
    num = 0.0; den = 0.0;
    for (int j = 0; j < N; j++) begin
      real x, p;
      int a;
      x = real'(m - s[j]) * real'(qk_scale) / 65536.0;
      a = (x >= 15.0) ? 15 : int'($floor(x + 0.5));
      p = 2.0 ** (-real'(a) / 2.0);
      num += p * real'(Vm[h][j][d]);
      den += p;
    end
    return num / den * real'(av_mult) / 256.0;
  endfunction

  initial begin
    repeat (40000000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int cyc;
    a_ld_head = 0; a_ld_sel = 0; a_ld_addr = 0; x_addr = 0; b_addr = 0; b_data = 0;
    lin_cmd = '0; comb_rd_tok = 0; comb_rd_tile = 0; cap_logits = 0; cap_attn = 0;
    qk_scale = 16'd150; av_mult = 16'd256; gate_scale = 16'd20000;
    for (int i = 0; i < DHD; i++) a_ld_data[i] = 0;
    for (int i = 0; i < D; i++) x_data[i] = 0;
    for (int i = 0; i < LAT; i++) begin pipe_v[i] = 0; pipe_addr[i] = 0; end
    for (int t = 0; t < N; t++) for (int e = 0; e < E; e++) begin routed[t][e] = 0; gw[t][e] = 0; end
    #1 rst_n = 0;  // falling edge applies the asynchronous reset at once
    repeat (3) @(negedge clk); rst_n = 1;

    // ---- attention ----
    for (int h = 0; h < HEADS; h++) for (int sel = 0; sel < 3; sel++) for (int j = 0; j < N; j++) begin
      @(negedge clk); a_ld_valid = 1; a_ld_head = HW'(h); a_ld_sel = 2'(sel); a_ld_addr = TW'(j);
      for (int t = 0; t < DHD; t++) begin
        int v;
        v = (sel == 2) ? $urandom_range(0, 255) - 128 : $urandom_range(0, 40) - 20;
        if (sel == 0) Qm[h][j][t] = v; else if (sel == 1) Km[h][j][t] = v; else Vm[h][j][t] = v;
        a_ld_data[t] = 8'(v);
      end
    end
    @(negedge clk); a_ld_valid = 0;
    cap_attn = 1;
    attn_start = 1; @(negedge clk); attn_start = 0; cyc = 1;
    while (!attn_done) begin @(negedge clk); cyc++; end
    cap_attn = 0;
    if (N % NPE != 0) n_short_qgroup++;
    $display("attention: %0d heads, %0d tokens, %0d cycles", HEADS, N, cyc);
    for (int i = 0; i < N; i++) for (int h = 0; h < HEADS; h++) for (int d = 0; d < DHD; d++) begin
      real e;
      e = attn_ref(h, i, d);
      if (e > 127.0) e = 127.0;
      if (e < -128.0) e = -128.0;
      checks++;
      if (real'(A[i][h * DHD + d]) - e > 2.0 || e - real'(A[i][h * DHD + d]) > 2.0) begin
        failures++; if (failures < 10) $display("FAIL attn t%0d h%0d d%0d got %0d exp %f", i, h, d, A[i][h*DHD+d], e);
      end
    end

    // ---- output projection (dense) on the attention rows ----
    for (int t = 0; t < N; t++) for (int i = 0; i < D; i++) Xr[t][i] = A[t][i];
    run_layer(0, 0, D, D, 0, 0, 0, 0, 0, 1000, 0, 0);

    // ---- MoE block: LayerNorm output loaded by the host ----
    for (int t = 0; t < N; t++) begin
      @(negedge clk); x_we = 1; x_addr = TW'(t);
      for (int i = 0; i < D; i++) begin Xr[t][i] = $urandom_range(0, 255) - 128; x_data[i] = 8'(Xr[t][i]); end
    end
    @(negedge clk); x_we = 0;
    @(negedge clk); gate_clear = 1; @(negedge clk); gate_clear = 0;
    cap_logits = 1;
    run_layer(0, 0, D, T, 0, 0, 0, 1, 0, 200000, E - 1, 0);
    cap_logits = 0;
    gate_ref();
    for (int t = 0; t < N; t++) for (int e = 0; e < E; e++) begin
      checks++;
      if (route_mask_ref(t, e) != dut.u_gate.mask_tab[e][t]) begin failures++; $display("FAIL route t%0d e%0d", t, e); end
    end
    @(negedge clk); comb_clear = 1; @(negedge clk); comb_clear = 0;
    for (int t = 0; t < N; t++) for (int c = 0; c < D; c++) comb_ref[t][c] = 0;
    for (int e = 0; e < E; e++) begin
      run_layer(1, e, D, DFF, 0, 1, 1, 0, 0, 300000 + e * 40000, 0, 0);   // expert fc1 + GELU -> H
      run_layer(1, e, DFF, D, 1, 0, 0, 0, 1, 2000000 + e * 40000, 0, 0);  // expert fc2 -> combine
    end
    for (int t = 0; t < N; t++) for (int l = 0; l < NTX; l++) begin
      @(negedge clk); comb_rd_tok = TW'(t); comb_rd_tile = CLW'(l);
      #1;
      for (int j = 0; j < T; j++) begin
        longint v;
        v = (comb_ref[t][l * T + j] + 128) >>> 8;
        if (v > 127) v = 127;
        if (v < -128) v = -128;
        checks++;
        if (longint'(comb_rd_data[j]) != v) begin
          failures++; if (failures < 10) $display("FAIL moe t%0d c%0d got %0d exp %0d", t, l*T+j, comb_rd_data[j], v);
        end
      end
    end

    // ---- dense MLP on the same kernel (mode switch) ----
    run_layer(0, 0, D, DFF, 0, 1, 1, 0, 0, 4000000, 0, 0);
    run_layer(0, 0, DFF, D, 1, 0, 0, 0, 0, 5000000, 0, 0);

    $display("mechanisms: stalled layers %0d, dense %0d, sparse %0d, gelu write-back %0d, empty experts %0d",
             n_stall_layers, n_dense, n_sparse, n_gelu_wb, n_empty_expert);
    $display("            short query groups %0d, short router groups %0d, gate tokens %0d, combine beats %0d",
             n_short_qgroup, n_short_rgroup, n_gate_tokens, n_comb_beats);
    checks++; if (n_stall_layers == 0) begin failures++; $display("FAIL no stall"); end
    checks++; if (n_dense == 0) begin failures++; $display("FAIL no dense layer"); end
    checks++; if (n_sparse == 0) begin failures++; $display("FAIL no sparse layer"); end
    checks++; if (n_gelu_wb == 0) begin failures++; $display("FAIL no GELU write-back"); end
    checks++; if (n_empty_expert == 0) begin failures++; $display("FAIL no empty expert"); end
    checks++; if (n_short_qgroup == 0) begin failures++; $display("FAIL no short query group"); end
    checks++; if (n_short_rgroup == 0) begin failures++; $display("FAIL no short router group"); end
    checks++; if (n_gate_tokens != N) begin failures++; $display("FAIL gate tokens %0d", n_gate_tokens); end
    checks++; if (n_comb_beats == 0) begin failures++; $display("FAIL no combine beat"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
