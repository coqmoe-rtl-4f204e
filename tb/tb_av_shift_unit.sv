// tb_av_shift_unit: random V rows and codes; the output must match
// round(sum_j 2^(-Aq_j/2) * V_j * recip * out_mult / 2^24) computed in real
// arithmetic (within 2 LSB for the truncating shifts), and it must appear
// D_HEAD/T_S + 1 cycles after fin_start.
module tb_av_shift_unit;
  import coq_pkg::*;
  localparam int D = 16, TS = 4, N = 25;
  logic clk = 0, rst_n = 1, clear = 0, v_valid = 0, fin_start = 0, out_valid;
  logic signed [7:0] v_in [D];
  logic [ABITS-1:0] aq_in;
  logic [32:0] recip;
  logic [15:0] out_mult;
  logic signed [7:0] out_row [D];
  int checks = 0, failures = 0;

  av_shift_unit #(.D_HEAD(D), .T_S(TS)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    real accr [D];
    real lsum;
    aq_in = 0; recip = 0; out_mult = 0;
    for (int i = 0; i < D; i++) v_in[i] = 0;
    #1 rst_n = 0;  // falling edge applies the asynchronous reset at once
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < 40; r++) begin
      int cyc;
      @(negedge clk); clear = 1;
      @(negedge clk); clear = 0;
      for (int i = 0; i < D; i++) accr[i] = 0.0;
      lsum = 0.0;
      for (int j = 0; j < N; j++) begin
        real p;
        v_valid = 1;
        aq_in = (j == 0) ? 4'd0 : 4'($urandom_range(0, 15));
        p = 2.0 ** (-real'(aq_in) / 2.0);
        lsum += p;
        for (int i = 0; i < D; i++) begin v_in[i] = 8'($urandom); accr[i] += p * real'(v_in[i]); end
        @(negedge clk);
      end
      v_valid = 0;
      recip = 33'($floor(4294967296.0 / (lsum * 65536.0)));
      out_mult = 16'($urandom_range(128, 512));
      fin_start = 1; @(negedge clk); fin_start = 0; cyc = 1;
      while (!out_valid) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != D / TS + 1) begin failures++; $display("FAIL latency %0d", cyc); end
      for (int i = 0; i < D; i++) begin
        real e;
        e = accr[i] * real'(recip) * real'(out_mult) / 16777216.0;
        if (e > 127.0) e = 127.0;
        if (e < -128.0) e = -128.0;
        checks++;
        if (real'(out_row[i]) - e > 2.0 || e - real'(out_row[i]) > 2.0) begin
          failures++; $display("FAIL r%0d d%0d got %0d exp %f", r, i, out_row[i], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
