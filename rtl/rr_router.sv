// rr_router: patch router of the reusable linear kernel.
//
// It holds the set of patch (token) indices still to be processed by the
// current layer: every token in dense mode, only those routed to the current
// expert in sparse mode. Each pick presents the first N_L available indices
// (lowest index first) on sel_idx, CU c receiving the c-th one (cyclic
// distribution), with sel_vld marking the CUs that received one; sel_addr is
// the matching activation-buffer row address. advance removes the presented
// indices. none is high when no index is left. The mode switch is only a
// different load mask, so the same hardware serves MoE and MLP layers.
// Combinational pick, registered mask.
module rr_router #(
  parameter int unsigned N_TOK = 197,
  parameter int unsigned N_L   = 4,
  localparam int unsigned TW = (N_TOK > 1) ? $clog2(N_TOK) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              load,            // start a layer
  input  logic              sparse,          // 0: all tokens, 1: load_mask
  input  logic [N_TOK-1:0]  load_mask,
  input  logic              advance,
  output logic [TW-1:0]     sel_idx  [N_L],
  output logic [TW-1:0]     sel_addr [N_L],
  output logic [N_L-1:0]    sel_vld,
  output logic              none
);
  logic [N_TOK-1:0] avail;
  logic [N_TOK-1:0] taken;

  always_comb begin
    logic [N_TOK-1:0] m;
    m = avail;
    taken = '0;
    for (int c = 0; c < int'(N_L); c++) begin
      sel_idx[c] = '0;
      sel_vld[c] = 1'b0;
      for (int i = int'(N_TOK) - 1; i >= 0; i--) begin
        if (m[i]) begin
          sel_idx[c] = TW'(i);
          sel_vld[c] = 1'b1;
        end
      end
      if (sel_vld[c]) begin
        m[sel_idx[c]]     = 1'b0;
        taken[sel_idx[c]] = 1'b1;
      end
      sel_addr[c] = sel_idx[c];
    end
    none = (avail == '0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       avail <= '0;
    else if (load)    avail <= sparse ? load_mask : '1;
    else if (advance) avail <= avail & ~taken;
  end
endmodule
