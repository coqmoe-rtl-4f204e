// tb_log_sqrt2_quant: checks the fused numerator quantizer against the
// real-valued definition Aq = clip(round(2*log2(e)*s*d), 0, 15) and
// 2^(-Aq/2), over random distances and scales and the clipping corner.
module tb_log_sqrt2_quant;
  import coq_pkg::*;
  logic [31:0] diff;
  logic [15:0] qk_scale;
  logic [ABITS-1:0] aq;
  logic [PFRAC:0] pval;
  int checks = 0, failures = 0;

  log_sqrt2_quant dut (.diff, .qk_scale, .aq, .pval);

  task automatic check_one(input logic [31:0] d, input logic [15:0] s);
    real x, pr;
    int  exp_aq;
    diff = d; qk_scale = s;
    #1;
    x = real'(d) * real'(s) / 65536.0;   // = -2*log2(exp(score - max))
    exp_aq = (x >= 15.0) ? 15 : int'($floor(x + 0.5));
    pr = 65536.0 * (2.0 ** (-real'(exp_aq) / 2.0));
    checks++;
    if (int'(aq) != exp_aq) begin
      failures++; $display("FAIL aq d=%0d s=%0d got %0d exp %0d", d, s, aq, exp_aq);
    end
    checks++;
    if ((real'(pval) - pr) > 1.0 || (pr - real'(pval)) > 1.0) begin
      failures++; $display("FAIL pval aq=%0d got %0d exp %f", aq, pval, pr);
    end
  endtask

  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    check_one(0, 16'd1000);
    check_one(32'hFFFF_FFFF, 16'hFFFF);
    for (int a = 0; a < 16; a++) check_one(32'(a), 16'd65535);   // codes 0..15
    for (int i = 0; i < 2000; i++) check_one($urandom_range(0, 5000), 16'($urandom_range(1, 65535)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
