// recip_unit: reciprocal of the softmax denominator, recip = floor(2^32 / l).
//
// l is the sum of 2^(-Aq/2) values in Q.16 and is at least 1.0 (2^16), because
// the row maximum always has code 0. A restoring divider produces one quotient
// bit per cycle, so one reciprocal costs 33 cycles after start; the paper needs
// only one reciprocal per attention row, so a serial divider is enough. The
// divider structure is this design's choice: the paper only names recip(l(x)).
// Interface: pulse start with l valid; done pulses one cycle with recip valid
// and recip holds until the next start.
module recip_unit #(
  parameter int unsigned LW = 32   // width of l
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [LW-1:0] l,
  output logic          busy,
  output logic          done,
  output logic [32:0]   recip
);
  logic [LW:0]   rem;
  logic [LW-1:0] den;
  logic [32:0]   quo;
  logic [5:0]    cnt;
  logic [LW:0]   trial;

  // numerator is 2^32: a single 1 followed by 32 zeros, fed MSB first
  always_comb trial = {rem[LW-1:0], (cnt == 6'd32)};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rem <= '0; den <= '0; quo <= '0; cnt <= '0;
      busy <= 1'b0; done <= 1'b0; recip <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        den  <= (l == '0) ? LW'(1) : l;
        rem  <= '0;
        quo  <= '0;
        cnt  <= 6'd32;
        busy <= 1'b1;
      end else if (busy) begin
        if (trial >= {1'b0, den}) begin
          rem <= trial - {1'b0, den};
          quo <= {quo[31:0], 1'b1};
        end else begin
          rem <= trial;
          quo <= {quo[31:0], 1'b0};
        end
        if (cnt == 0) begin
          busy  <= 1'b0;
          done  <= 1'b1;
          recip <= (trial >= {1'b0, den}) ? {quo[31:0], 1'b1} : {quo[31:0], 1'b0};
        end else begin
          cnt <= cnt - 6'd1;
        end
      end
    end
  end
endmodule
