// tb_gating_topk: random gate logits per token. Checks that exactly the TOPK
// largest logits (lower index first on ties) are routed, that the routing
// masks and the weight table agree, and that the kept weights are the
// softmax of the log-sqrt2-quantized exponentials, within 1/256.
module tb_gating_topk;
  import coq_pkg::*;
  localparam int N = 7, E = 8, K = 2;
  logic clk = 0, rst_n = 1, clear = 0, in_valid = 0;
  logic [15:0] gate_scale;
  logic [2:0] in_tok, w_tok;
  logic signed [7:0] in_logit [E];
  logic [2:0] mask_exp, w_exp;
  logic [N-1:0] exp_mask;
  logic [8:0] w_gate;
  int checks = 0, failures = 0;
  int lg [N][E];

  gating_topk #(.N_TOK(N), .N_EXP(E), .TOPK(K)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    in_tok = 0; w_tok = 0; mask_exp = 0; w_exp = 0; gate_scale = 0;
    for (int e = 0; e < E; e++) in_logit[e] = 0;
    #1 rst_n = 0;  // falling edge applies the asynchronous reset at once
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < 30; r++) begin
      @(negedge clk); clear = 1; gate_scale = 16'($urandom_range(3000, 40000));
      @(negedge clk); clear = 0;
      for (int t = 0; t < N; t++) begin
        in_valid = 1; in_tok = 3'(t);
        for (int e = 0; e < E; e++) begin
          lg[t][e] = (r % 3 == 0) ? $urandom_range(0, 3) : $urandom_range(0, 255) - 128;
          in_logit[e] = 8'(lg[t][e]);
        end
        @(negedge clk);
      end
      in_valid = 0;
      @(negedge clk);
      for (int t = 0; t < N; t++) begin
        int sel [K];
        bit used [E];
        real p [K];
        real ps;
        for (int e = 0; e < E; e++) used[e] = 0;
        for (int k = 0; k < K; k++) begin
          int best;
          best = -1;
          for (int e = 0; e < E; e++)
            if (!used[e] && (best < 0 || lg[t][e] > lg[t][best])) best = e;
          sel[k] = best; used[best] = 1;
        end
        ps = 0.0;
        for (int k = 0; k < K; k++) begin
          real x;
          int a;
          x = real'(lg[t][sel[0]] - lg[t][sel[k]]) * real'(gate_scale) / 65536.0;
          a = (x >= 15.0) ? 15 : int'($floor(x + 0.5));
          p[k] = 2.0 ** (-real'(a) / 2.0);
          ps += p[k];
        end
        for (int e = 0; e < E; e++) begin
          real ew;
          ew = 0.0;
          for (int k = 0; k < K; k++) if (sel[k] == e) ew = p[k] / ps * 256.0;
          mask_exp = 3'(e); w_tok = 3'(t); w_exp = 3'(e);
          #1;
          checks++;
          if (exp_mask[t] != used[e]) begin failures++; $display("FAIL mask t%0d e%0d got %0d", t, e, exp_mask[t]); end
          checks++;
          if (real'(w_gate) - ew > 1.0 || ew - real'(w_gate) > 1.0) begin
            failures++; $display("FAIL weight t%0d e%0d got %0d exp %f", t, e, w_gate, ew);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
