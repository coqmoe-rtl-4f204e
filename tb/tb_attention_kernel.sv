// tb_attention_kernel: loads random Q, K, V for one head, runs the kernel and
// compares every output row with softmax attention evaluated in real
// arithmetic on the log-sqrt2-quantized numerators (within 2 LSB). Runs with
// a token count that leaves the last query group short, and checks that the
// run takes no more than the per-group cycle budget of the three passes.
module tb_attention_kernel;
  localparam int N = 13, D = 16, NPE = 4, TS = 4;
  localparam int NG = (N + NPE - 1) / NPE;
  logic clk = 0, rst_n = 1;
  logic ld_valid = 0;
  logic [1:0] ld_sel;
  logic [3:0] ld_addr;
  logic signed [7:0] ld_data [D];
  logic [15:0] qk_scale, out_mult;
  logic start = 0, busy, done, o_valid;
  logic [3:0] o_tok;
  logic signed [7:0] o_data [D];
  logic signed [7:0] Q [N][D];
  logic signed [7:0] K [N][D];
  logic signed [7:0] V [N][D];
  bit seen [N];
  int checks = 0, failures = 0;

  attention_kernel #(.N_TOK(N), .D_HEAD(D), .N_PE(NPE), .T_S(TS)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic real ref_out(int i, int d);
    int s [N];
    int m;
    real num, den;
    m = -1000000;
    for (int j = 0; j < N; j++) begin
      s[j] = 0;
      for (int t = 0; t < D; t++) s[j] += int'(Q[i][t]) * int'(K[j][t]);
      if (s[j] > m) m = s[j];
    end
    num = 0.0; den = 0.0;
    for (int j = 0; j < N; j++) begin
      real x, p;
      int a;
      x = real'(m - s[j]) * real'(qk_scale) / 65536.0;
      a = (x >= 15.0) ? 15 : int'($floor(x + 0.5));
      p = 2.0 ** (-real'(a) / 2.0);
      num += p * real'(V[j][d]);
      den += p;
    end
    return num / den * real'(out_mult) / 256.0;
  endfunction

  // output checker
  always @(posedge clk) begin
    if (o_valid) begin
      seen[o_tok] = 1;
      for (int d = 0; d < D; d++) begin
        real e;
        e = ref_out(int'(o_tok), d);
        if (e > 127.0) e = 127.0;
        if (e < -128.0) e = -128.0;
        checks++;
        if (real'(o_data[d]) - e > 2.0 || e - real'(o_data[d]) > 2.0) begin
          failures++;
          if (failures < 10) $display("FAIL tok %0d d %0d got %0d exp %f", o_tok, d, o_data[d], e);
        end
      end
    end
  end

  initial begin
    ld_sel = 0; ld_addr = 0; qk_scale = 0; out_mult = 0;
    for (int t = 0; t < D; t++) ld_data[t] = 0;
    #1 rst_n = 0;  // falling edge applies the asynchronous reset at once
    repeat (2) @(negedge clk); rst_n = 1;
    for (int run = 0; run < 3; run++) begin
      int cyc;
      for (int j = 0; j < N; j++) for (int t = 0; t < D; t++) begin
        Q[j][t] = 8'($urandom_range(0, 60) - 30);
        K[j][t] = 8'($urandom_range(0, 60) - 30);
        V[j][t] = 8'($urandom);
      end
      for (int sel = 0; sel < 3; sel++) for (int j = 0; j < N; j++) begin
        @(negedge clk); ld_valid = 1; ld_sel = 2'(sel); ld_addr = 4'(j);
        for (int t = 0; t < D; t++) ld_data[t] = (sel == 0) ? Q[j][t] : (sel == 1) ? K[j][t] : V[j][t];
      end
      @(negedge clk); ld_valid = 0;
      qk_scale = 16'($urandom_range(20, 300));
      out_mult = 16'($urandom_range(200, 300));
      for (int j = 0; j < N; j++) seen[j] = 0;
      start = 1; @(negedge clk); start = 0; cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      for (int j = 0; j < N; j++) begin
        checks++;
        if (!seen[j]) begin failures++; $display("FAIL row %0d missing", j); end
      end
      $display("attention run %0d: %0d cycles for %0d groups", run, cyc, NG);
      checks++;
      if (cyc > NG * (3 * N + 2 * NPE + D / TS + 50) || cyc < NG * 3 * N) begin
        failures++; $display("FAIL cycle count %0d", cyc);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
