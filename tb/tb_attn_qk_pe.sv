// tb_attn_qk_pe: loads a query, broadcasts N random keys, and checks every
// queued score against q.k, the row maximum and the FIFO order; a second
// query must restart the maximum and the queue.
module tb_attn_qk_pe;
  localparam int D = 16, N = 21;
  logic clk = 0, rst_n = 1, q_load = 0, k_valid = 0, score_pop = 0;
  logic signed [7:0] q_in [D];
  logic signed [7:0] k_in [D];
  logic signed [31:0] score_out, row_max;
  logic score_empty, busy;
  logic [5:0] score_count;
  int checks = 0, failures = 0;

  attn_qk_pe #(.D_HEAD(D), .N_TOK(N)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int ref_s [N];
    int ref_max;
    for (int i = 0; i < D; i++) begin q_in[i] = 0; k_in[i] = 0; end
    #1 rst_n = 0;  // falling edge applies the asynchronous reset at once
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < 6; r++) begin
      @(negedge clk); q_load = 1;
      for (int i = 0; i < D; i++) q_in[i] = 8'($urandom);
      @(negedge clk); q_load = 0;
      for (int j = 0; j < N; j++) begin
        k_valid = 1;
        ref_s[j] = 0;
        for (int i = 0; i < D; i++) begin k_in[i] = 8'($urandom); ref_s[j] += int'(q_in[i]) * int'(k_in[i]); end
        if (j == 0 || ref_s[j] > ref_max) ref_max = ref_s[j];
        @(negedge clk);
      end
      k_valid = 0;
      @(negedge clk);
      checks++;
      if (int'(score_count) != N) begin failures++; $display("FAIL count %0d", score_count); end
      checks++;
      if (row_max != ref_max) begin failures++; $display("FAIL max %0d exp %0d", row_max, ref_max); end
      for (int j = 0; j < N; j++) begin
        checks++;
        if (score_out != ref_s[j]) begin failures++; $display("FAIL score %0d got %0d exp %0d", j, score_out, ref_s[j]); end
        score_pop = 1; @(negedge clk); score_pop = 0;
      end
      checks++;
      if (!score_empty) begin failures++; $display("FAIL not empty"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
