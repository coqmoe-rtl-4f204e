// tb_recip_unit: checks floor(2^32/l) for random denominators in the range a
// softmax row can produce (1.0 .. 197.0 in Q.16) and the latency of one
// quotient bit per cycle (33 bits plus the load cycle).
module tb_recip_unit;
  logic clk = 0, rst_n = 1, start = 0, busy, done;
  logic [31:0] l;
  logic [32:0] recip;
  int checks = 0, failures = 0;

  recip_unit dut (.clk, .rst_n, .start, .l, .busy, .done, .recip);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic run(input logic [31:0] lv);
    longint unsigned expq;
    int cyc;
    @(negedge clk); l = lv; start = 1;
    @(negedge clk); start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    expq = (64'd1 << 32) / 64'(lv);
    checks++;
    if (64'(recip) != expq) begin failures++; $display("FAIL l=%0d got %0d exp %0d", lv, recip, expq); end
    checks++;
    if (cyc != 34) begin failures++; $display("FAIL latency %0d", cyc); end
  endtask

  initial begin
    l = 0;
    #1 rst_n = 0;  // falling edge applies the asynchronous reset at once
    repeat (3) @(negedge clk); rst_n = 1;
    run(32'd65536);
    run(32'd65536 * 197);
    run(32'd65537);
    for (int i = 0; i < 200; i++) run(32'($urandom_range(65536, 65536 * 197)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
