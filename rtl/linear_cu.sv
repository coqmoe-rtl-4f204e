// linear_cu: compute unit of the reusable linear kernel.
//
// A CU owns one token. It holds that token's activation row (prefetched by the
// router) and T_OUT accumulators, one per output column of the current tile.
// Each mac cycle it takes the activation at input index k and a broadcast
// weight row W[k][tile] of T_OUT values, and adds the T_OUT products: the
// multiplier/adder/register lane of the PE drawing. ld_bias starts a tile by
// loading the biases into the accumulators. Row prefetch is one write of the
// whole row (act_we). The accumulators are read on acc.
module linear_cu #(
  parameter int unsigned D_MAX = 768,
  parameter int unsigned T_OUT = 16,
  localparam int unsigned KW = (D_MAX > 1) ? $clog2(D_MAX) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               act_we,               // prefetch the token's row
  input  logic signed [7:0]  act_row [D_MAX],
  input  logic               ld_bias,
  input  logic signed [31:0] bias [T_OUT],
  input  logic               mac,
  input  logic [KW-1:0]      k,
  input  logic signed [7:0]  w [T_OUT],
  output logic signed [31:0] acc [T_OUT]
);
  logic signed [7:0] row [D_MAX];
  logic signed [7:0] a;

  always_comb a = row[k];

  always_ff @(posedge clk) begin
    if (act_we) row <= act_row;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < int'(T_OUT); j++) acc[j] <= '0;
    end else if (ld_bias) begin
      acc <= bias;
    end else if (mac) begin
      for (int j = 0; j < int'(T_OUT); j++)
        acc[j] <= acc[j] + 32'(a) * 32'(w[j]);
    end
  end
endmodule
