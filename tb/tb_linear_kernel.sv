// tb_linear_kernel: runs a dense first layer (X -> hidden buffer, with GELU)
// and a sparse second layer (hidden -> out, routed tokens only) against an
// integer reference, with an always-ready and then a randomly stalling
// weight memory of two cycles latency. Checks every output, that only the
// routed tokens appear in sparse mode, that each weight word is fetched once
// per group of N_L tokens, and the cycle count.
module tb_linear_kernel;
  import coq_pkg::*;
  localparam int N = 11, DX = 32, DH = 64, NL = 4, T = 16, LAT = 2;
  logic clk = 0, rst_n = 1;
  logic x_we = 0;
  logic [3:0] x_addr;
  logic [DX/T-1:0] x_be;
  logic signed [7:0] x_data [DX];
  logic b_we = 0;
  logic [5:0] b_addr;
  logic signed [31:0] b_data;
  logic cmd_valid = 0;
  lin_cmd_t cmd, cur_cmd;
  logic [N-1:0] expert_mask;
  logic busy, done;
  logic w_req_valid, w_req_ready, w_rsp_valid;
  logic [23:0] w_req_addr;
  logic signed [7:0] w_rsp_data [T];
  logic o_valid;
  logic [3:0] o_tok;
  logic [1:0] o_tile;
  logic signed [7:0] o_data [T];
  logic [31:0] stall_cycles, groups_done;

  linear_kernel #(.N_TOK(N), .D_X(DX), .D_H(DH), .N_L(NL), .T_OUT(T)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int X [N][DH];
  int H [N][DH];
  int B [DH];
  int expv [N][DH];
  bit got [N][DH];
  bit tok_on [N];
  int nreq;
  bit random_ready;

  function automatic int wval(int addr, int lane);
    int h;
    h = (addr * 1103515245 + lane * 12345 + 777) ^ (addr >>> 3);
    return ((h >>> 8) & 255) - 128;
  endfunction

  // weight memory: fixed latency, in order
  int pipe_addr [LAT];
  bit pipe_v [LAT];
  always @(negedge clk) w_req_ready <= random_ready ? ($urandom_range(0, 3) != 0) : 1'b1;
  always @(posedge clk) begin
    if (w_req_valid && w_req_ready) nreq++;
    for (int i = LAT - 1; i > 0; i--) begin pipe_v[i] <= pipe_v[i-1]; pipe_addr[i] <= pipe_addr[i-1]; end
    pipe_v[0] <= w_req_valid && w_req_ready;
    pipe_addr[0] <= int'(w_req_addr);
  end
  always_comb begin
    w_rsp_valid = pipe_v[LAT-1];
    for (int j = 0; j < T; j++) w_rsp_data[j] = 8'(wval(pipe_addr[LAT-1], j));
  end

  // output monitor
  always @(posedge clk) begin
    if (rst_n && o_valid) begin
      for (int j = 0; j < T; j++) begin
        int col;
        col = int'(o_tile) * T + j;
        checks++;
        if (!tok_on[o_tok]) begin failures++; $display("FAIL token %0d not routed", o_tok); end
        else if (int'(o_data[j]) != expv[o_tok][col]) begin
          failures++;
          if (failures < 10) $display("FAIL tok %0d col %0d got %0d exp %0d", o_tok, col, o_data[j], expv[o_tok][col]);
        end
        got[o_tok][col] = 1;
      end
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

  task automatic run_layer(input bit sparse, input int din, input int dout, input bit src_h,
                           input bit wb, input bit gelu, input int wbase, input logic [N-1:0] m);
    int mult, sh, cyc, ntok, groups;
    mult = $urandom_range(100, 400); sh = 14;
    for (int c = 0; c < dout; c++) begin
      B[c] = $urandom_range(0, 4000) - 2000;
      @(negedge clk); b_we = 1; b_addr = 6'(c); b_data = B[c];
    end
    @(negedge clk); b_we = 0;
    ntok = 0;
    for (int t = 0; t < N; t++) begin
      tok_on[t] = sparse ? m[t] : 1'b1;
      if (tok_on[t]) ntok++;
      for (int c = 0; c < dout; c++) begin
        longint acc;
        acc = B[c];
        for (int k = 0; k < din; k++) begin
          int tile, a;
          tile = c / T;
          a = src_h ? H[t][k] : X[t][k];
          acc += longint'(a) * longint'(wval(wbase + tile * din + k, c % T));
        end
        expv[t][c] = rq(acc, mult, sh, gelu);
        got[t][c] = 0;
      end
    end
    groups = (ntok + NL - 1) / NL;
    cmd = '0;
    cmd.mode = sparse ? MODE_SPARSE : MODE_DENSE;
    cmd.d_in = 12'(din); cmd.d_out = 12'(dout); cmd.src_sel = src_h; cmd.wb_en = wb;
    cmd.gelu_en = gelu; cmd.rq_mult = 16'(mult); cmd.rq_shift = 6'(sh); cmd.w_base = 24'(wbase);
    expert_mask = m;
    nreq = 0;
    @(negedge clk); cmd_valid = 1;
    @(negedge clk); cmd_valid = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    for (int t = 0; t < N; t++) for (int c = 0; c < dout; c++) begin
      checks++;
      if (got[t][c] != tok_on[t]) begin failures++; $display("FAIL coverage t%0d c%0d", t, c); end
      if (wb && tok_on[t]) H[t][c] = expv[t][c];
    end
    checks++;
    if (nreq != groups * (dout / T) * din) begin
      failures++; $display("FAIL weight fetches %0d exp %0d", nreq, groups * (dout / T) * din);
    end
    $display("layer sparse=%0d din=%0d dout=%0d tokens=%0d: %0d cycles, %0d fetches, stalls %0d", sparse, din, dout, ntok, cyc, nreq, stall_cycles);
    if (!random_ready) begin
      // per group: pick 1, prefetch N_L+1, per tile: bias 1 + d_in + LAT MAC + N_L+1 drain
      int expc;
      expc = groups * (1 + NL + 1 + (dout / T) * (1 + din + LAT + NL + 1)) + 3;
      checks++;
      if (cyc > expc + groups * 2 || cyc < expc - groups * 2) begin
        failures++; $display("FAIL cycles %0d, expected about %0d", cyc, expc);
      end
    end
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    x_addr = 0; x_be = '1; b_addr = 0; b_data = 0; cmd = '0; expert_mask = '0; random_ready = 0;
    for (int i = 0; i < DX; i++) x_data[i] = 0;
    for (int i = 0; i < LAT; i++) begin pipe_v[i] = 0; pipe_addr[i] = 0; end
    #1 rst_n = 0;  // falling edge applies the asynchronous reset at once
    repeat (2) @(negedge clk); rst_n = 1;
    for (int pass = 0; pass < 2; pass++) begin
      random_ready = (pass == 1);
      for (int t = 0; t < N; t++) begin
        @(negedge clk); x_we = 1; x_addr = 4'(t); x_be = '1;
        for (int i = 0; i < DX; i++) begin X[t][i] = $urandom_range(0, 255) - 128; x_data[i] = 8'(X[t][i]); end
        for (int i = DX; i < DH; i++) X[t][i] = 0;
      end
      @(negedge clk); x_we = 0;
      run_layer(0, DX, DH, 0, 1, 1, 100, '0);                     // dense fc1 + GELU -> H
      run_layer(1, DH, DX, 1, 0, 0, 5000, N'($urandom));          // sparse fc2 from H
      run_layer(1, DH, DX, 1, 0, 0, 9000, '0);                    // expert with no tokens
    end
    checks++;
    if (stall_cycles == 0) begin failures++; $display("FAIL no stall seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
