// attn_qk_pe: one processing element of the streaming attention kernel
// (pass 1 of the softmax).
//
// The PE owns one query row. Key rows are broadcast to every PE at one row per
// cycle; the PE forms the full D_HEAD-term dot product q.k in that cycle (the
// MAC), keeps the running maximum of the row (the Max unit) and pushes the
// score into its score FIFO. Because each PE holds a complete query, no partial
// results are exchanged between PEs, and the number of key fetches does not
// depend on how many PEs there are. Loading a new query (q_load) restarts the
// maximum and empties the FIFO. One key per cycle and a one-cycle pipeline
// register after the MAC are this design's choices.
module attn_qk_pe #(
  parameter int unsigned D_HEAD = 64,
  parameter int unsigned N_TOK  = 197,
  localparam int unsigned CW = (N_TOK > 1) ? $clog2(N_TOK) + 1 : 2
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               q_load,               // capture q_in, start a new row
  input  logic signed [7:0]  q_in [D_HEAD],
  input  logic               k_valid,              // broadcast key row
  input  logic signed [7:0]  k_in [D_HEAD],
  input  logic               score_pop,            // pass 2 reads one score
  output logic signed [31:0] score_out,            // oldest score (show-ahead)
  output logic               score_empty,
  output logic [CW-1:0]      score_count,
  output logic signed [31:0] row_max,              // maximum of the scores pushed so far
  output logic               busy                  // a score is still in the MAC register
);
  logic signed [7:0]  q_reg [D_HEAD];
  logic signed [31:0] dot, score_r;
  logic               score_v;
  logic               first;

  always_comb begin
    dot = '0;
    for (int i = 0; i < int'(D_HEAD); i++)
      dot += 32'(q_reg[i]) * 32'(k_in[i]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      score_v <= 1'b0; score_r <= '0; row_max <= '0; first <= 1'b1;
      for (int i = 0; i < int'(D_HEAD); i++) q_reg[i] <= '0;
    end else begin
      score_v <= 1'b0;
      if (q_load) begin
        q_reg <= q_in;
        first <= 1'b1;
        row_max <= '0;
      end else if (k_valid) begin
        score_r <= dot;
        score_v <= 1'b1;
        if (first || dot > row_max) row_max <= dot;
        first <= 1'b0;
      end
    end
  end

  assign busy = score_v;

  sync_fifo #(.W(32), .DEPTH(N_TOK)) u_score_fifo (
    .clk, .rst_n, .flush(q_load),
    .push(score_v), .din(score_r),
    .pop(score_pop), .dout(score_out),
    .empty(score_empty), .full(), .count(score_count)
  );
endmodule
