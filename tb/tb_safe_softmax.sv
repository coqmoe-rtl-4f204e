// tb_safe_softmax: random score rows with their maximum; the queued codes
// must be clip(round(c*(max - x)), 0, 15) and l(x) the sum of 2^(-Aq/2),
// checked against real arithmetic.
module tb_safe_softmax;
  import coq_pkg::*;
  localparam int N = 30;
  logic clk = 0, rst_n = 1, clear = 0, step = 0, aq_pop = 0;
  logic [15:0] qk_scale;
  logic signed [31:0] row_max, score_in;
  logic [ABITS-1:0] aq_out;
  logic aq_empty;
  logic [31:0] l_sum;
  int checks = 0, failures = 0;

  safe_softmax #(.N_TOK(N)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int sc [N];
    int codes [N];
    real lref;
    score_in = 0; row_max = 0; qk_scale = 0;
    #1 rst_n = 0;  // falling edge applies the asynchronous reset at once
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < 20; r++) begin
      @(negedge clk); clear = 1;
      qk_scale = 16'($urandom_range(200, 9000));
      row_max = -32'sd100000;
      for (int j = 0; j < N; j++) begin
        sc[j] = $urandom_range(0, 4000) - 2000;
        if (sc[j] > row_max) row_max = sc[j];
      end
      @(negedge clk); clear = 0;
      lref = 0.0;
      for (int j = 0; j < N; j++) begin
        real x;
        x = real'(row_max - sc[j]) * real'(qk_scale) / 65536.0;
        codes[j] = (x >= 15.0) ? 15 : int'($floor(x + 0.5));
        lref += 65536.0 * (2.0 ** (-real'(codes[j]) / 2.0));
        step = 1; score_in = sc[j];
        @(negedge clk);
      end
      step = 0;
      @(negedge clk);
      checks++;
      if (real'(l_sum) - lref > real'(N) || lref - real'(l_sum) > real'(N)) begin
        failures++; $display("FAIL l got %0d exp %f", l_sum, lref);
      end
      for (int j = 0; j < N; j++) begin
        checks++;
        if (int'(aq_out) != codes[j]) begin failures++; $display("FAIL code %0d got %0d exp %0d", j, aq_out, codes[j]); end
        aq_pop = 1; @(negedge clk); aq_pop = 0;
      end
      checks++;
      if (!aq_empty) begin failures++; $display("FAIL fifo not empty"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
