// tb_rr_router: loads random sparse masks and the dense mode, then picks
// until none are left. Each pick must present, in CU order, the lowest N_L
// indices still available, and every selected token must be served once.
module tb_rr_router;
  localparam int N = 23, NL = 4;
  logic clk = 0, rst_n = 1, load = 0, sparse = 0, advance = 0;
  logic [N-1:0] load_mask;
  logic [4:0] sel_idx [NL];
  logic [4:0] sel_addr [NL];
  logic [NL-1:0] sel_vld;
  logic none;
  int checks = 0, failures = 0;

  rr_router #(.N_TOK(N), .N_L(NL)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic run(input bit sp, input logic [N-1:0] m);
    logic [N-1:0] rem;
    int picks;
    rem = sp ? m : '1;
    @(negedge clk); load = 1; sparse = sp; load_mask = m;
    @(negedge clk); load = 0;
    picks = 0;
    while (1) begin
      int c;
      checks++;
      if (none != (rem == '0)) begin failures++; $display("FAIL none flag"); end
      if (rem == '0) break;
      c = 0;
      for (int i = 0; i < N && c < NL; i++) begin
        if (rem[i]) begin
          checks++;
          if (!sel_vld[c] || int'(sel_idx[c]) != i || int'(sel_addr[c]) != i) begin
            failures++; $display("FAIL cu %0d got %0d/%0d exp %0d", c, sel_vld[c], sel_idx[c], i);
          end
          rem[i] = 0; c++;
        end
      end
      for (; c < NL; c++) begin
        checks++;
        if (sel_vld[c]) begin failures++; $display("FAIL cu %0d should be idle", c); end
      end
      advance = 1; @(negedge clk); advance = 0;
      picks++;
      if (picks > N) break;
    end
  endtask

  initial begin
    load_mask = 0;
    #1 rst_n = 0;  // falling edge applies the asynchronous reset at once
    repeat (2) @(negedge clk); rst_n = 1;
    run(0, '0);
    run(1, '0);
    run(1, N'(1) << (N - 1));
    for (int n = 0; n < 100; n++) run(1, N'({$urandom, $urandom}));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
