// tb_moe_combine: random weighted beats into random token tiles after a
// clear; every tile read back must equal sat8(round(sum w*e / 256)).
module tb_moe_combine;
  localparam int N = 9, D = 32, T = 8, NT = D / T;
  logic clk = 0, rst_n = 1, clear = 0, in_valid = 0;
  logic [3:0] in_tok, rd_tok;
  logic [1:0] in_tile, rd_tile;
  logic signed [7:0] in_data [T];
  logic [8:0] in_w;
  logic signed [7:0] rd_data [T];
  longint ref_acc [N][D];
  int checks = 0, failures = 0;

  moe_combine #(.N_TOK(N), .D_MODEL(D), .T_OUT(T)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    in_tok = 0; in_tile = 0; in_w = 0; rd_tok = 0; rd_tile = 0;
    for (int j = 0; j < T; j++) in_data[j] = 0;
    #1 rst_n = 0;  // falling edge applies the asynchronous reset at once
    repeat (2) @(negedge clk); rst_n = 1;
    for (int round_i = 0; round_i < 4; round_i++) begin
      @(negedge clk); clear = 1;
      for (int t = 0; t < N; t++) for (int d = 0; d < D; d++) ref_acc[t][d] = 0;
      @(negedge clk); clear = 0;
      for (int b = 0; b < 60; b++) begin
        in_valid = 1;
        in_tok = 4'($urandom_range(0, N - 1)); in_tile = 2'($urandom_range(0, NT - 1));
        in_w = 9'($urandom_range(0, 256));
        for (int j = 0; j < T; j++) begin
          in_data[j] = 8'($urandom);
          ref_acc[in_tok][int'(in_tile) * T + j] += longint'(in_data[j]) * longint'(in_w);
        end
        @(negedge clk);
      end
      in_valid = 0;
      for (int t = 0; t < N; t++) for (int l = 0; l < NT; l++) begin
        rd_tok = 4'(t); rd_tile = 2'(l); #1;
        for (int j = 0; j < T; j++) begin
          longint v;
          v = (ref_acc[t][l * T + j] + 128) >>> 8;
          if (v > 127) v = 127;
          if (v < -128) v = -128;
          checks++;
          if (longint'(rd_data[j]) != v) begin failures++; if (failures < 10) $display("FAIL t%0d l%0d j%0d got %0d exp %0d", t, l, j, rd_data[j], v); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
