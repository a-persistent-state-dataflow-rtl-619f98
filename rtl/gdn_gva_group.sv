// gdn_gva_group: one grouped-value-attention pair: two value heads that share one
// query/key head. It holds the pair's q.k dot-product unit (phase 1 of the fused
// step) and two gdn_pe elements; q and k tiles are broadcast to both PEs, while
// each PE has its own state banks, v, g and beta.
//
// Phase 1: over D/PK cycles (tile_en, tile) PK products q_j k_j are reduced by an
// adder tree and accumulated into alpha_qk, which both PEs then use in phase 4.
// For the data cycles of phases 2 and 5 the group selects the q/k tile d_t for
// its PEs.
// Sharing q/k between the two heads of a pair is the paper's (its system diagram
// prints "q, k shared" over each pair of PEs); the dot-product unit's form is
// this design's.
module gdn_gva_group
  import gdn_pkg::*;
#(
  parameter int unsigned D  = 128,
  parameter int unsigned PK = 16,
  localparam int unsigned R  = 2,
  localparam int unsigned T  = D / PK,
  localparam int unsigned TW = (T > 1) ? $clog2(T) : 1,
  localparam int unsigned IW = $clog2(D)
) (
  input  logic                        clk,
  input  phase_e                      phase,
  input  logic                        tile_en,
  input  logic [TW-1:0]               tile,
  input  logic                        rd_vld,
  input  logic                        wr_vld,
  input  logic [IW-1:0]               d_i,
  input  logic [TW-1:0]               d_t,
  input  logic [D-1:0][31:0]          q,
  input  logic [D-1:0][31:0]          k,
  input  logic [R-1:0][D-1:0][31:0]   v,
  input  logic [R-1:0][31:0]          g,
  input  logic [R-1:0][31:0]          beta,
  input  logic [R-1:0][PK-1:0][31:0]  s_rd,
  output logic [R-1:0][PK-1:0][31:0]  s_wr,
  output logic [R-1:0][PK-1:0][31:0]  o_tile,
  output logic [31:0]                 alpha_qk
);
  logic [PK-1:0][31:0] q_dt, k_dt, q_t, k_t, prod;
  logic [31:0] tsum, asum;

  for (genvar l = 0; l < PK; l++) begin : g_lane
    assign q_dt[l] = q[IW'(d_t) * IW'(PK) + IW'(l)];
    assign k_dt[l] = k[IW'(d_t) * IW'(PK) + IW'(l)];
    assign q_t[l]  = q[IW'(tile) * IW'(PK) + IW'(l)];
    assign k_t[l]  = k[IW'(tile) * IW'(PK) + IW'(l)];
    fp32_mul u_mul (.a(q_t[l]), .b(k_t[l]), .y(prod[l]));
  end
  fp32_sum_tree #(.N(PK)) u_tree (.x(prod), .y(tsum));
  fp32_add u_acc (.a((tile == 0) ? 32'd0 : alpha_qk), .b(tsum), .y(asum));

  always_ff @(posedge clk) begin
    if (phase == PH_DOT && tile_en) alpha_qk <= asum;
  end

  for (genvar h = 0; h < R; h++) begin : g_pe
    gdn_pe #(.D(D), .PK(PK)) u_pe (
      .clk, .phase, .tile_en, .tile, .rd_vld, .wr_vld, .d_i, .d_t,
      .k_tile(k_dt), .q_tile(q_dt), .v(v[h]), .g(g[h]), .beta(beta[h]),
      .alpha_qk, .s_rd(s_rd[h]), .s_wr(s_wr[h]), .o_tile(o_tile[h])
    );
  end
endmodule
