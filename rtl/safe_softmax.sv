// safe_softmax: pass 2 of the fused softmax for one attention row.
//
// With the row maximum from pass 1, each step pops one score, forms the
// distance max - score, quantizes the numerator exp(score - max) to a 4-bit
// log-sqrt2 code (log_sqrt2_quant) and pushes the code into the exp-results
// FIFO for pass 3, while the denominator l(x) = sum 2^(-Aq/2) is accumulated.
// Only the numerator is quantized; the division by l(x) is deferred to the end
// of pass 3. clear starts a new row. One score per step; the output FIFO is
// read by av_shift_unit.
module safe_softmax
  import coq_pkg::*;
#(
  parameter int unsigned N_TOK = 197
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clear,           // new row: l := 0, FIFO emptied
  input  logic [15:0]        qk_scale,        // 2*log2(e)*s_score, Q0.16
  input  logic signed [31:0] row_max,
  input  logic               step,            // consume score_in this cycle
  input  logic signed [31:0] score_in,
  input  logic               aq_pop,          // pass 3 consumes one code
  output logic [ABITS-1:0]   aq_out,
  output logic               aq_empty,
  output logic [31:0]        l_sum            // Q.16 denominator
);
  logic [31:0]      diff;
  logic [ABITS-1:0] aq;
  logic [PFRAC:0]   pval;

  always_comb diff = 32'(row_max - score_in);

  log_sqrt2_quant u_q (.diff, .qk_scale, .aq, .pval);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      l_sum <= '0;
    else if (clear)  l_sum <= '0;
    else if (step)   l_sum <= l_sum + 32'(pval);
  end

  sync_fifo #(.W(ABITS), .DEPTH(N_TOK)) u_exp_fifo (
    .clk, .rst_n, .flush(clear),
    .push(step), .din(aq),
    .pop(aq_pop), .dout(aq_out),
    .empty(aq_empty), .full(), .count()
  );

  always_ff @(posedge clk) begin
    if (rst_n && step && !clear)
      assert (score_in <= row_max) else $error("safe_softmax: score above row maximum");
  end
endmodule
