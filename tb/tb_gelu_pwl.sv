// tb_gelu_pwl: every INT8 input (Q4.4). Checks the hard-sigmoid form
// x*clip(0.5 + 0.4375x, 0, 1) exactly (within rounding) and that the result
// stays within 0.25 of the true GELU (tanh form).
module tb_gelu_pwl;
  logic signed [7:0] x, y;
  int checks = 0, failures = 0;

  gelu_pwl dut (.x, .y);

  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int v = -128; v < 128; v++) begin
      real xr, sg, yr, gt;
      x = 8'(v);
      #1;
      xr = real'(v) / 16.0;
      sg = 0.5 + 0.4375 * xr;
      if (sg < 0.0) sg = 0.0;
      if (sg > 1.0) sg = 1.0;
      yr = xr * sg * 16.0;
      gt = 0.5 * xr * (1.0 + $tanh(0.7978845608 * (xr + 0.044715 * xr * xr * xr))) * 16.0;
      checks++;
      if (real'(y) - yr > 0.51 || yr - real'(y) > 0.51) begin
        failures++; $display("FAIL pwl x=%0d got %0d exp %f", v, y, yr);
      end
      checks++;
      if (real'(y) - gt > 4.0 || gt - real'(y) > 4.0) begin
        failures++; $display("FAIL gelu x=%0d got %0d gelu %f", v, y, gt);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
