// tb_requant8: random accumulators, multipliers and shifts against the real
// value acc*mult/2^shift rounded half up and saturated to INT8.
module tb_requant8;
  logic signed [31:0] acc;
  logic [15:0] mult;
  logic [5:0] shift;
  logic signed [7:0] q;
  int checks = 0, failures = 0;

  requant8 dut (.*);

  initial begin
    #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < 5000; i++) begin
      real r;
      int e;
      acc = 32'($urandom_range(0, 400000)) - 32'sd200000;
      mult = 16'($urandom_range(1, 65535));
      shift = 6'($urandom_range(10, 30));
      #1;
      r = $floor(real'(acc) * real'(mult) / (2.0 ** real'(shift)) + 0.5);
      e = (r > 127.0) ? 127 : (r < -128.0) ? -128 : int'(r);
      checks++;
      if (int'(q) != e) begin
        failures++;
        if (failures < 10) $display("FAIL acc=%0d m=%0d sh=%0d got %0d exp %0d", acc, mult, shift, q, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
