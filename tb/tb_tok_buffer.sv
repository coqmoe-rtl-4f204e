// tb_tok_buffer: random row writes with lane-group enables against a
// reference array, read back with the one-cycle read latency.
module tb_tok_buffer;
  localparam int DEPTH = 20, WIDTH = 32, BE = 8, NBE = WIDTH / BE;
  logic clk = 0;
  logic wr_en = 0, rd_en = 0;
  logic [4:0] wr_addr, rd_addr;
  logic [NBE-1:0] wr_be;
  logic signed [7:0] wr_data [WIDTH];
  logic signed [7:0] rd_data [WIDTH];
  logic signed [7:0] ref_mem [DEPTH][WIDTH];
  int checks = 0, failures = 0;

  tok_buffer #(.DEPTH(DEPTH), .WIDTH(WIDTH), .BE_LANES(BE)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    wr_addr = 0; rd_addr = 0; wr_be = '1;
    for (int i = 0; i < WIDTH; i++) wr_data[i] = 0;
    // fill every row completely first
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); wr_en = 1; wr_addr = 5'(a); wr_be = '1;
      for (int i = 0; i < WIDTH; i++) begin wr_data[i] = 8'($urandom); ref_mem[a][i] = wr_data[i]; end
    end
    @(negedge clk); wr_en = 0;
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 5'($urandom_range(0, DEPTH - 1)); wr_be = NBE'($urandom);
      for (int i = 0; i < WIDTH; i++) begin
        wr_data[i] = 8'($urandom);
        if (wr_be[i / BE]) ref_mem[wr_addr][i] = wr_data[i];
      end
      @(negedge clk); wr_en = 0;
      rd_en = 1; rd_addr = 5'($urandom_range(0, DEPTH - 1));
      @(negedge clk); rd_en = 0;
      for (int i = 0; i < WIDTH; i++) begin
        checks++;
        if (rd_data[i] !== ref_mem[rd_addr][i]) begin
          failures++;
          if (failures < 10) $display("FAIL row %0d lane %0d got %0d exp %0d", rd_addr, i, rd_data[i], ref_mem[rd_addr][i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
