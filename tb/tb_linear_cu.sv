// tb_linear_cu: random rows, biases and weight rows; the accumulators must
// equal bias + sum_k a[k]*w[k][j] for a random k order and length.
module tb_linear_cu;
  localparam int D = 24, T = 4;
  logic clk = 0, rst_n = 1, act_we = 0, ld_bias = 0, mac = 0;
  logic signed [7:0] act_row [D];
  logic signed [31:0] bias [T];
  logic [4:0] k;
  logic signed [7:0] w [T];
  logic signed [31:0] acc [T];
  int checks = 0, failures = 0;

  linear_cu #(.D_MAX(D), .T_OUT(T)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    longint ref_acc [T];
    k = 0;
    for (int j = 0; j < T; j++) begin w[j] = 0; bias[j] = 0; end
    #1 rst_n = 0;  // falling edge applies the asynchronous reset at once
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 50; n++) begin
      @(negedge clk);
      act_we = 1;
      for (int i = 0; i < D; i++) act_row[i] = 8'($urandom);
      @(negedge clk); act_we = 0; ld_bias = 1;
      for (int j = 0; j < T; j++) begin bias[j] = 32'($urandom_range(0, 2000)) - 1000; ref_acc[j] = bias[j]; end
      @(negedge clk); ld_bias = 0;
      for (int s = 0; s < D; s++) begin
        mac = 1; k = 5'($urandom_range(0, D - 1));
        for (int j = 0; j < T; j++) begin w[j] = 8'($urandom); ref_acc[j] += longint'(act_row[k]) * longint'(w[j]); end
        @(negedge clk);
      end
      mac = 0;
      @(negedge clk);
      for (int j = 0; j < T; j++) begin
        checks++;
        if (longint'(acc[j]) != ref_acc[j]) begin failures++; $display("FAIL n=%0d j=%0d got %0d exp %0d", n, j, acc[j], ref_acc[j]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
