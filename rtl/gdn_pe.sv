// gdn_pe: processing element for one value head; executes phases 2-5 of the
// fused Gated DeltaNet decode step on that head's D x D state matrix S
// (phase 1, alpha = q.k, is shared by the two heads of a GVA pair and done in
// gdn_gva_group).
//
//   phase 2 (read pass):  for each row i, r_i = sum_j S[j][i] k_j and
//                         o^_i = g * sum_j S[j][i] q_j, PK words of S per cycle
//   phase 3 (delta):      dv = beta (v - r), PK elements per cycle
//   phase 4 (output):     o  = (o^ + alpha dv) / sqrt(D), PK elements per cycle
//   phase 5 (write pass): S[j][i] = g S[j][i] + k_j dv_i, PK words per cycle
//
// Using S_t^T q = g S_{t-1}^T q + (q.k) dv, the output needs no third pass over
// the updated state: the state is read once (phase 2) and read-modified-written
// once (phase 5). The PE has PK lanes, each with three multipliers and one adder
// shared between the phases, plus two PK-input adder trees and two accumulators
// for phase 2. Row i's 8 tiles (D/PK) are accumulated in consecutive cycles.
//
// Interface and timing: the compute controller issues the state reads; the PE
// works on the returned data one cycle later, qualified by rd_vld (phase 2) or
// wr_vld (phase 5) with the row d_i and tile d_t of that data. s_wr is
// combinational from s_rd and is written back by the controller in the same
// cycle. In phases 3 and 4 (tile_en, tile) it handles PK elements per cycle;
// o_tile is valid combinationally in the phase-4 cycle of its tile.
// The phase algebra, lane count and one-read/one-write structure are the
// paper's; operator sharing, summation order and the combinational (unpipelined)
// arithmetic are this design's.
module gdn_pe
  import gdn_pkg::*;
#(
  parameter int unsigned D  = 128,
  parameter int unsigned PK = 16,
  localparam int unsigned T  = D / PK,
  localparam int unsigned TW = (T > 1) ? $clog2(T) : 1,
  localparam int unsigned IW = $clog2(D)
) (
  input  logic                  clk,
  input  phase_e                phase,     // current phase (3/4 use tile_en)
  input  logic                  tile_en,
  input  logic [TW-1:0]         tile,
  input  logic                  rd_vld,    // phase-2 data cycle
  input  logic                  wr_vld,    // phase-5 data cycle
  input  logic [IW-1:0]         d_i,
  input  logic [TW-1:0]         d_t,
  input  logic [PK-1:0][31:0]   k_tile,    // k_j for the data-cycle tile d_t
  input  logic [PK-1:0][31:0]   q_tile,
  input  logic [D-1:0][31:0]    v,
  input  logic [31:0]           g,
  input  logic [31:0]           beta,
  input  logic [31:0]           alpha_qk,  // q.k from the GVA pair
  input  logic [PK-1:0][31:0]   s_rd,
  output logic [PK-1:0][31:0]   s_wr,
  output logic [PK-1:0][31:0]   o_tile
);
  localparam fp32_t INV_SQRT_D = inv_sqrt_d(D);

  logic [31:0] r    [D];
  logic [31:0] ohat [D];
  logic [31:0] dv   [D];
  logic [31:0] acc_k, acc_q;

  logic [PK-1:0][31:0] ma_a, ma_b, ma_y, mb_a, mb_b, mb_y, ad_a, ad_b, ad_y, mc_a, mc_b, mc_y;
  logic [31:0] dv_i;
  assign dv_i = dv[d_i];

  for (genvar l = 0; l < PK; l++) begin : g_lane
    logic [IW-1:0] e_idx;
    assign e_idx = IW'(tile) * IW'(PK) + IW'(l);
    always_comb begin
      ma_a[l] = s_rd[l];      ma_b[l] = k_tile[l];
      mb_a[l] = s_rd[l];      mb_b[l] = q_tile[l];
      ad_a[l] = ma_y[l];      ad_b[l] = mb_y[l];
      mc_a[l] = ad_y[l];      mc_b[l] = INV_SQRT_D;
      case (phase)
        PH_DELTA: begin
          ad_a[l] = v[e_idx];
          ad_b[l] = {~r[e_idx][31], r[e_idx][30:0]};
          mc_b[l] = beta;
        end
        PH_OUT: begin
          ma_a[l] = alpha_qk;   ma_b[l] = dv[e_idx];
          ad_a[l] = ohat[e_idx]; ad_b[l] = ma_y[l];
        end
        PH_WRITE: begin
          ma_a[l] = g;          ma_b[l] = s_rd[l];
          mb_a[l] = k_tile[l];  mb_b[l] = dv_i;
        end
        default: ;
      endcase
    end
    fp32_mul u_ma (.a(ma_a[l]), .b(ma_b[l]), .y(ma_y[l]));
    fp32_mul u_mb (.a(mb_a[l]), .b(mb_b[l]), .y(mb_y[l]));
    fp32_add u_ad (.a(ad_a[l]), .b(ad_b[l]), .y(ad_y[l]));
    fp32_mul u_mc (.a(mc_a[l]), .b(mc_b[l]), .y(mc_y[l]));
    assign s_wr[l]   = ad_y[l];
    assign o_tile[l] = mc_y[l];
  end

  // phase 2 reduction: tile sums, then accumulation over the row's tiles
  logic [31:0] tk, tq, sk, sq, og;
  fp32_sum_tree #(.N(PK)) u_tree_k (.x(ma_y), .y(tk));
  fp32_sum_tree #(.N(PK)) u_tree_q (.x(mb_y), .y(tq));
  fp32_add u_acc_k (.a((d_t == 0) ? 32'd0 : acc_k), .b(tk), .y(sk));
  fp32_add u_acc_q (.a((d_t == 0) ? 32'd0 : acc_q), .b(tq), .y(sq));
  fp32_mul u_g     (.a(g), .b(sq), .y(og));

  always_ff @(posedge clk) begin
    if (rd_vld) begin
      acc_k <= sk;
      acc_q <= sq;
      if (d_t == TW'(T - 1)) begin
        r[d_i]    <= sk;
        ohat[d_i] <= og;
      end
    end
    if (phase == PH_DELTA && tile_en) begin
      for (int l = 0; l < PK; l++) dv[IW'(tile) * IW'(PK) + IW'(l)] <= mc_y[l];
    end
  end
endmodule
