// tok_buffer: on-chip token buffer (K-Buffer, V-Buffer, Q patches, linear
// activation buffers).
//
// DEPTH rows of WIDTH INT8 lanes; one token row per address. One write port
// (whole row) and one read port with a one-cycle registered read, which maps
// onto FPGA block RAM. The paper names these buffers but gives no organisation;
// row-per-token layout and a single write and read port are this design's
// choices. A row may also be written lane-group-wise: wr_be selects groups of
// BE_LANES lanes, so a head's slice of a wider row can be written on its own.
module tok_buffer #(
  parameter int unsigned DEPTH    = 197,
  parameter int unsigned WIDTH    = 64,   // INT8 lanes per row
  parameter int unsigned BE_LANES = 64,   // lanes per byte-enable group
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned NBE = (WIDTH + BE_LANES - 1) / BE_LANES
) (
  input  logic                   clk,
  input  logic                   wr_en,
  input  logic [AW-1:0]          wr_addr,
  input  logic [NBE-1:0]         wr_be,
  input  logic signed [7:0]      wr_data [WIDTH],
  input  logic                   rd_en,
  input  logic [AW-1:0]          rd_addr,
  output logic signed [7:0]      rd_data [WIDTH]
);
  logic signed [7:0] mem [DEPTH][WIDTH];

  always_ff @(posedge clk) begin
    if (wr_en) begin
      for (int i = 0; i < int'(WIDTH); i++)
        if (wr_be[i / BE_LANES]) mem[wr_addr][i] <= wr_data[i];
    end
    if (rd_en) rd_data <= mem[rd_addr];
  end

  always_ff @(posedge clk) begin
    assert (!wr_en || int'(wr_addr) < int'(DEPTH)) else $error("tok_buffer: write address out of range");
    assert (!rd_en || int'(rd_addr) < int'(DEPTH)) else $error("tok_buffer: read address out of range");
  end
endmodule
