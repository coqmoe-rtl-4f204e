// av_shift_unit: pass 3 of the fused softmax for one attention row, plus the
// final normalisation.
//
// For every broadcast V row j the unit pops the row's code Aq_j and adds V_j,
// shifted right, into one of two accumulator banks:
//   even Aq = 2k   : 2^(-Aq/2) = 2^-k            -> acc_e += V_j >>> k
//   odd  Aq = 2k+1 : 2^(-Aq/2) = 2^-(k+1)*sqrt2  -> acc_o += V_j >>> (k+1)
// V is pre-shifted left by VFRAC bits so the right shifts keep precision. No
// multiplier is used in this loop. The parity factor sqrt(2) is applied once
// per element at the end: num = acc_e + sqrt2*acc_o. Because every element of
// the row shares the denominator, the row is then scaled by one factor
// m = recip(l) * out_mult, and the INT8 result is
//   out[d] = sat8(round(num[d] * m / 2^24))
// computed T_S elements per cycle with T_S multipliers.
// Timing: one V row per v_valid cycle; after fin_start the row appears on
// out_row with out_valid after D_HEAD/T_S + 1 cycles.
// The paper's shift formula writes the shift as floor(Aq/2) with a factor
// s' = sqrt(2) for odd codes, which would make odd codes larger than even
// ones; the shift by ceil(Aq/2) used here is the one that matches
// 2^(-Aq/2) = 2^floor(-Aq/2) * sqrt(2)^parity, which the same section derives.
module av_shift_unit
  import coq_pkg::*;
#(
  parameter int unsigned D_HEAD = 64,
  parameter int unsigned T_S    = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clear,             // new row
  input  logic               v_valid,           // broadcast V row, consumes aq_in
  input  logic signed [7:0]  v_in [D_HEAD],
  input  logic [ABITS-1:0]   aq_in,
  input  logic               fin_start,         // recip valid: start normalisation
  input  logic [32:0]        recip,             // floor(2^32 / l)
  input  logic [15:0]        out_mult,          // s_v / s_out, Q8.8
  output logic               out_valid,
  output logic signed [7:0]  out_row [D_HEAD]
);
  localparam int unsigned NG = (D_HEAD + T_S - 1) / T_S;
  localparam int unsigned GW = (NG > 1) ? $clog2(NG) : 1;

  logic signed [31:0] acc_e [D_HEAD];
  logic signed [31:0] acc_o [D_HEAD];
  logic [ABITS-1:0]   sh;
  logic [47:0]        m;
  logic               fin_busy;
  logic [GW-1:0]      grp;

  // ceil(Aq/2) for odd codes, Aq/2 for even ones
  always_comb sh = (aq_in >> 1) + ABITS'(aq_in[0]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(D_HEAD); i++) begin
        acc_e[i] <= '0; acc_o[i] <= '0; out_row[i] <= '0;
      end
      m <= '0; fin_busy <= 1'b0; grp <= '0; out_valid <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      if (clear) begin
        for (int i = 0; i < int'(D_HEAD); i++) begin
          acc_e[i] <= '0; acc_o[i] <= '0;
        end
        fin_busy <= 1'b0;
      end else if (v_valid) begin
        for (int i = 0; i < int'(D_HEAD); i++) begin
          if (aq_in[0]) acc_o[i] <= acc_o[i] + ((32'(v_in[i]) <<< VFRAC) >>> sh);
          else          acc_e[i] <= acc_e[i] + ((32'(v_in[i]) <<< VFRAC) >>> sh);
        end
      end else if (fin_start) begin
        // one multiplier forms the row factor; it is shared by all elements
        m        <= (48'(recip) * 48'(out_mult) + 48'd128) >> 8;
        fin_busy <= 1'b1;
        grp      <= '0;
      end else if (fin_busy) begin
        // T_S multipliers: elements grp*T_S .. grp*T_S+T_S-1
        for (int t = 0; t < int'(T_S); t++) begin
          int d;
          logic signed [63:0] num;
          d = int'(grp) * int'(T_S) + t;
          if (d < int'(D_HEAD)) begin
            num = 64'(acc_e[d]) + ((64'(acc_o[d]) * $signed(64'(SQRT2_Q14)) + 64'sd8192) >>> 14);
            out_row[d] <= sat_rshift8(num * $signed({16'd0, m}), 6'd24);
          end
        end
        if (int'(grp) == int'(NG) - 1) begin
          fin_busy  <= 1'b0;
          out_valid <= 1'b1;
        end else begin
          grp <= grp + GW'(1);
        end
      end
    end
  end
endmodule
