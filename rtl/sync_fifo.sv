// sync_fifo: single-clock show-ahead FIFO used for the score and exp-result
// queues between the passes of the attention kernel.
//
// dout always shows the oldest entry while !empty; push and pop may happen in
// the same cycle. flush empties the queue. Pushing a full FIFO or popping an
// empty one is a protocol error and is flagged by assertions.
module sync_fifo #(
  parameter int unsigned W     = 32,
  parameter int unsigned DEPTH = 197,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         flush,
  input  logic         push,
  input  logic [W-1:0] din,
  input  logic         pop,
  output logic [W-1:0] dout,
  output logic         empty,
  output logic         full,
  output logic [AW:0]  count
);
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wptr, rptr;

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (int'(p) == int'(DEPTH) - 1) ? '0 : p + AW'(1);
  endfunction

  assign empty = (count == 0);
  assign full  = (int'(count) == int'(DEPTH));
  assign dout  = mem[rptr];

  always_ff @(posedge clk) begin
    if (push && !full) mem[wptr] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr <= '0; rptr <= '0; count <= '0;
    end else if (flush) begin
      wptr <= '0; rptr <= '0; count <= '0;
    end else begin
      if (push && !full)  wptr <= inc(wptr);
      if (pop && !empty)  rptr <= inc(rptr);
      count <= count + (AW+1)'(push && !full) - (AW+1)'(pop && !empty);
    end
  end

  always_ff @(posedge clk) begin
    if (rst_n && !flush) begin
      assert (!(push && full)) else $error("sync_fifo: push while full");
      assert (!(pop && empty)) else $error("sync_fifo: pop while empty");
    end
  end
endmodule
