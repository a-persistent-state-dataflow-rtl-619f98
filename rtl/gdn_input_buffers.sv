// gdn_input_buffers: on-chip buffers for one token's inputs, in FP32:
//   q [HQK*D], k [HQK*D]      query and key vectors of all q/k heads
//   v [HV*D]                  value vectors of all value heads
//   alpha [HV], b [HV]        token-dependent gate inputs
//   a_log [HV], dt [HV]       per-head learned gate parameters
// Three write ports, one per AXI read port: port 0 (gmem0) writes q, k, v
// (selected by job 0, 1, 2), port 1 (gmem1) alpha, b (job 0, 1) and port 2
// (gmem2) a_log, dt (job 0, 1), each at element index idx. The prepare stage
// reads q, k, v one element per cycle each and the four per-head scalars by
// head index; all reads are synchronous (data one cycle after the address).
// The buffer set is the paper's; port organisation is this design's.
module gdn_input_buffers #(
  parameter int unsigned HQK = 16,
  parameter int unsigned HV  = 32,
  parameter int unsigned D   = 128,
  localparam int unsigned QW = $clog2(HQK * D),
  localparam int unsigned VW = $clog2(HV * D),
  localparam int unsigned HW = $clog2(HV)
) (
  input  logic          clk,
  input  logic          wr0_en,
  input  logic [1:0]    wr0_job,
  input  logic [VW-1:0] wr0_idx,
  input  logic [31:0]   wr0_data,
  input  logic          wr1_en,
  input  logic          wr1_job,
  input  logic [HW-1:0] wr1_idx,
  input  logic [31:0]   wr1_data,
  input  logic          wr2_en,
  input  logic          wr2_job,
  input  logic [HW-1:0] wr2_idx,
  input  logic [31:0]   wr2_data,
  input  logic [QW-1:0] q_addr,
  output logic [31:0]   q_data,
  input  logic [QW-1:0] k_addr,
  output logic [31:0]   k_data,
  input  logic [VW-1:0] v_addr,
  output logic [31:0]   v_data,
  input  logic [HW-1:0] h_addr,
  output logic [31:0]   alpha_data,
  output logic [31:0]   b_data,
  output logic [31:0]   a_log_data,
  output logic [31:0]   dt_data
);
  logic [31:0] q_mem [HQK*D];
  logic [31:0] k_mem [HQK*D];
  logic [31:0] v_mem [HV*D];
  logic [31:0] alpha_mem [HV];
  logic [31:0] b_mem [HV];
  logic [31:0] a_log_mem [HV];
  logic [31:0] dt_mem [HV];

  always_ff @(posedge clk) begin
    if (wr0_en && wr0_job == 2'd0) q_mem[QW'(wr0_idx)] <= wr0_data;
    if (wr0_en && wr0_job == 2'd1) k_mem[QW'(wr0_idx)] <= wr0_data;
    if (wr0_en && wr0_job == 2'd2) v_mem[wr0_idx] <= wr0_data;
    if (wr1_en && !wr1_job) alpha_mem[wr1_idx] <= wr1_data;
    if (wr1_en &&  wr1_job) b_mem[wr1_idx] <= wr1_data;
    if (wr2_en && !wr2_job) a_log_mem[wr2_idx] <= wr2_data;
    if (wr2_en &&  wr2_job) dt_mem[wr2_idx] <= wr2_data;
  end

  always_ff @(posedge clk) begin
    q_data     <= q_mem[q_addr];
    k_data     <= k_mem[k_addr];
    v_data     <= v_mem[v_addr];
    alpha_data <= alpha_mem[h_addr];
    b_data     <= b_mem[h_addr];
    a_log_data <= a_log_mem[h_addr];
    dt_data    <= dt_mem[h_addr];
  end
endmodule
