// gdn_state_mem: the persistent state of all HV = 32 value heads (32 matrices of
// 128 x 128 FP32 words, 2 MB), held on chip across decode steps.
//
// It is H_ITER x PK dual-port banks (8 x 16 = 128 in the main configuration):
// the head dimension is fully partitioned over H_ITER head positions and the
// column index j is cyclically partitioned over PK banks. Value head
// h = n*H_ITER + p of iteration n keeps its word S[j][i] in bank (p, j mod PK) at
// address (n*D + i)*(D/PK) + j/PK, so the N_ITER = HV/H_ITER iterations share the
// same physical banks at different addresses. All heads and lanes run in lock
// step, so one read address and one write address serve every bank; each bank
// has its own data.
// Interface: rd_en/rd_addr -> rd_data[h][lane] one cycle later; wr_en/wr_addr/
// wr_data[h][lane] written on the clock edge.
// Bank count, partitioning and the iteration-slice layout follow the paper's
// system diagram and text; the address order inside a bank follows its
// [iter][h][i][j] indexing.
module gdn_state_mem #(
  parameter int unsigned H_ITER = 8,
  parameter int unsigned PK     = 16,
  parameter int unsigned D      = 128,
  parameter int unsigned N_ITER = 4,
  localparam int unsigned DEPTH = N_ITER * D * (D / PK),
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic                              clk,
  input  logic                              rd_en,
  input  logic [AW-1:0]                     rd_addr,
  output logic [H_ITER-1:0][PK-1:0][31:0]   rd_data,
  input  logic                              wr_en,
  input  logic [AW-1:0]                     wr_addr,
  input  logic [H_ITER-1:0][PK-1:0][31:0]   wr_data
);
  for (genvar h = 0; h < H_ITER; h++) begin : g_head
    for (genvar c = 0; c < PK; c++) begin : g_col
      gdn_state_bank #(.DEPTH(DEPTH), .W(32)) u_bank (
        .clk, .rd_en, .rd_addr, .rd_data(rd_data[h][c]),
        .wr_en, .wr_addr, .wr_data(wr_data[h][c])
      );
    end
  end
endmodule
