// moe_combine: MoE output aggregation, MoE(y) = sum_j G_j(y) * E_j(y).
//
// Each expert's second linear layer streams its INT8 outputs here, one token
// tile of T_OUT values per beat, with the token's gate weight G (Q.8). The
// unit accumulates G*E into a per-token 32-bit row. A tile that has not been
// written since clear counts as zero, so clear is a single cycle. The read
// port returns sat8(round(acc / 256)) for one tile, combinationally.
// One beat per cycle; a beat may not target the tile being read in the same
// cycle. The paper gives the equation; the storage and formats here are this
// design's choices.
module moe_combine #(
  parameter int unsigned N_TOK   = 197,
  parameter int unsigned D_MODEL = 192,
  parameter int unsigned T_OUT   = 16,
  localparam int unsigned TW = (N_TOK > 1) ? $clog2(N_TOK) : 1,
  localparam int unsigned NT = D_MODEL / T_OUT,
  localparam int unsigned LW = (NT > 1) ? $clog2(NT) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  input  logic              in_valid,
  input  logic [TW-1:0]     in_tok,
  input  logic [LW-1:0]     in_tile,
  input  logic signed [7:0] in_data [T_OUT],
  input  logic [8:0]        in_w,
  input  logic [TW-1:0]     rd_tok,
  input  logic [LW-1:0]     rd_tile,
  output logic signed [7:0] rd_data [T_OUT]
);
  logic signed [31:0] acc [N_TOK][D_MODEL];
  logic [NT-1:0]      written [N_TOK];

  always_ff @(posedge clk) begin
    if (in_valid) begin
      for (int j = 0; j < int'(T_OUT); j++) begin
        logic signed [31:0] old;
        old = written[in_tok][in_tile] ? acc[in_tok][int'(in_tile) * int'(T_OUT) + j] : 32'sd0;
        acc[in_tok][int'(in_tile) * int'(T_OUT) + j] <= old + 32'(in_data[j]) * $signed({23'd0, in_w});
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int t = 0; t < int'(N_TOK); t++) written[t] <= '0;
    end else if (clear) begin
      for (int t = 0; t < int'(N_TOK); t++) written[t] <= '0;
    end else if (in_valid) begin
      written[in_tok][in_tile] <= 1'b1;
    end
  end

  always_comb begin
    for (int j = 0; j < int'(T_OUT); j++) begin
      logic signed [31:0] v;
      v = written[rd_tok][rd_tile] ? acc[rd_tok][int'(rd_tile) * int'(T_OUT) + j] : 32'sd0;
      v = (v + 32'sd128) >>> 8;
      rd_data[j] = (v > 32'sd127) ? 8'sd127 : (v < -32'sd128) ? -8'sd128 : v[7:0];
    end
  end
endmodule
