// gdn_compute: the compute stage. Runs the fused five-phase decode step for the
// H_ITER value heads of one iteration in parallel (H_ITER/2 GVA pairs of two
// PEs), reading and writing the persistent state, and writes the H_ITER x D
// outputs into the out channel.
//
// A single controller sequences all heads in lock step:
//   DOT   D/PK cycles      alpha = q.k per pair
//   READ  D*D/PK issue cycles (+1 for the BRAM read latency): row i, tile t
//   DELTA D/PK cycles
//   OUT   D/PK cycles, writing PK outputs per head per cycle; the out channel is
//         committed at the end of this phase so that the store stage can start
//         while the write pass runs
//   WRITE D*D/PK issue cycles (+1): read S on one port, write g S + k dv^T on the
//         other one cycle later
// then it releases the input channels. With D = 128, PK = 16 an iteration takes
// 8 + 1025 + 8 + 8 + 1025 = 2074 cycles, against the paper's 2 x 1024 + 3 x 8
// = 2072 model and ~2,105 reported by HLS.
// tok_start clears the iteration counter; iteration n uses state slice n.
// The state RAM has no reset, so its write enable is also held off while rst_n
// is low: flip-flops that power up at random cannot write into the state before
// the reset has cleared them.
// Interface: channel data come in as flat arrays from gdn_pingpong (q/k per pair,
// v/g/beta per head); in_valid means all input channels hold a full bank.
// The phase order, cycle budget, lock-step heads and per-iteration state slices
// are the paper's; the exact control encoding is this design's.
module gdn_compute
  import gdn_pkg::*;
#(
  parameter int unsigned D      = 128,
  parameter int unsigned PK     = 16,
  parameter int unsigned H_ITER = 8,
  parameter int unsigned N_ITER = 4,
  localparam int unsigned P     = H_ITER / 2,
  localparam int unsigned T     = D / PK,
  localparam int unsigned TW    = (T > 1) ? $clog2(T) : 1,
  localparam int unsigned IW    = $clog2(D),
  localparam int unsigned NW    = (N_ITER > 1) ? $clog2(N_ITER) : 1,
  localparam int unsigned AW    = $clog2(N_ITER * D * T)
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              tok_start,
  // input channels
  input  logic                              in_valid,
  input  logic [P-1:0][D-1:0][31:0]         q,
  input  logic [P-1:0][D-1:0][31:0]         k,
  input  logic [H_ITER-1:0][D-1:0][31:0]    v,
  input  logic [H_ITER-1:0][31:0]           g,
  input  logic [H_ITER-1:0][31:0]           beta,
  output logic                              in_release,
  // out channel
  input  logic                              out_ready,
  output logic [H_ITER*D-1:0]               out_wr_en,
  output logic [H_ITER*D-1:0][31:0]         out_wr_data,
  output logic                              out_commit,
  // state memory
  output logic                              s_rd_en,
  output logic [AW-1:0]                     s_rd_addr,
  input  logic [H_ITER-1:0][PK-1:0][31:0]   s_rd_data,
  output logic                              s_wr_en,
  output logic [AW-1:0]                     s_wr_addr,
  output logic [H_ITER-1:0][PK-1:0][31:0]   s_wr_data,
  // status
  output logic                              busy,
  output phase_e                            phase
);
  logic [NW-1:0] n_it;
  logic [IW-1:0] row;
  logic [TW-1:0] tile;
  logic          issue;          // a state read is issued this cycle
  logic          last_issue;
  logic          rd_vld, wr_vld; // data cycle of phase 2 / phase 5
  logic [IW-1:0] d_i;
  logic [TW-1:0] d_t;
  logic [AW-1:0] d_addr;
  logic          tile_en;
  logic          drain;          // one cycle after the last issue of a pass
  logic [H_ITER-1:0][PK-1:0][31:0] o_tile;

  assign last_issue = (row == IW'(D - 1)) && (tile == TW'(T - 1));
  assign issue      = (phase == PH_READ || phase == PH_WRITE) && busy && !drain;
  assign tile_en    = (phase == PH_DOT || phase == PH_DELTA || phase == PH_OUT);
  assign s_rd_en    = issue;
  assign s_rd_addr  = AW'((int'(n_it) * D + int'(row)) * T + int'(tile));
  assign s_wr_en    = wr_vld && rst_n;  // no state write before reset has settled the controller
  assign s_wr_addr  = d_addr;


  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase <= PH_IDLE; busy <= 1'b0; n_it <= '0; row <= '0; tile <= '0; drain <= 1'b0;
      rd_vld <= 1'b0; wr_vld <= 1'b0; d_i <= '0; d_t <= '0; d_addr <= '0;
      in_release <= 1'b0; out_commit <= 1'b0;
    end else begin
      in_release <= 1'b0;
      out_commit <= 1'b0;
      rd_vld <= issue && phase == PH_READ;
      wr_vld <= issue && phase == PH_WRITE;
      d_i    <= row;
      d_t    <= tile;
      d_addr <= s_rd_addr;
      if (tok_start && !busy) n_it <= '0;
      case (phase)
        PH_IDLE: if (in_valid && out_ready && !in_release) begin
          phase <= PH_DOT; busy <= 1'b1; tile <= '0; row <= '0;
        end
        PH_DOT, PH_DELTA: begin
          tile <= tile + TW'(1);
          if (tile == TW'(T - 1)) begin
            tile  <= '0;
            phase <= (phase == PH_DOT) ? PH_READ : PH_OUT;
          end
        end
        PH_OUT: begin
          tile <= tile + TW'(1);
          if (tile == TW'(T - 1)) begin
            tile <= '0; phase <= PH_WRITE; out_commit <= 1'b1;
          end
        end
        PH_READ, PH_WRITE: begin
          if (drain) begin
            drain <= 1'b0;
            if (phase == PH_READ) phase <= PH_DELTA;
            else begin
              phase <= PH_IDLE; busy <= 1'b0; in_release <= 1'b1;
              n_it  <= (n_it == NW'(N_ITER - 1)) ? '0 : n_it + NW'(1);
            end
          end else begin
            tile <= tile + TW'(1);
            if (tile == TW'(T - 1)) begin
              tile <= '0;
              row  <= row + IW'(1);
            end
            if (last_issue) begin
              drain <= 1'b1; row <= '0; tile <= '0;
            end
          end
        end
        default: phase <= PH_IDLE;
      endcase
    end
  end

  for (genvar p = 0; p < P; p++) begin : g_pair
    logic [31:0] alpha_qk;
    gdn_gva_group #(.D(D), .PK(PK)) u_grp (
      .clk, .phase, .tile_en, .tile, .rd_vld, .wr_vld, .d_i, .d_t,
      .q(q[p]), .k(k[p]),
      .v({v[2*p+1], v[2*p]}), .g({g[2*p+1], g[2*p]}), .beta({beta[2*p+1], beta[2*p]}),
      .s_rd({s_rd_data[2*p+1], s_rd_data[2*p]}),
      .s_wr({s_wr_data[2*p+1], s_wr_data[2*p]}),
      .o_tile({o_tile[2*p+1], o_tile[2*p]}),
      .alpha_qk
    );
  end

  // out channel writes during phase 4: head h, element tile*PK + lane
  always_comb begin
    out_wr_en   = '0;
    for (int e = 0; e < H_ITER * D; e++) out_wr_data[e] = 32'd0;
    for (int h = 0; h < H_ITER; h++) begin
      for (int l = 0; l < PK; l++) begin
        out_wr_en[h * D + int'(tile) * PK + l]   = (phase == PH_OUT);
        out_wr_data[h * D + int'(tile) * PK + l] = o_tile[h][l];
      end
    end
  end

  a_out_ready: assert property (@(posedge clk) disable iff (!rst_n) (phase == PH_OUT) |-> out_ready);
endmodule
