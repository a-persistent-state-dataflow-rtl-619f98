// gdn_decode_top: Gated DeltaNet decode accelerator, one decode step (token) of a
// GDN layer per start pulse, with the recurrent state of all HV value heads kept
// on chip between tokens.
//
// Flow of one token:
//   1. load: three AXI4 read masters fetch the token inputs into the on-chip
//      buffers in parallel; gmem0 carries q, k, v and gmem1 alpha, b (FP16,
//      widened to FP32 on arrival), gmem2 carries A_log, dt_bias (FP32).
//   2. dataflow loop over N_ITER = HV/H_ITER head groups, three stages linked by
//      ping-pong channels so that they overlap across iterations:
//        prepare (copy q/k/v slices, compute gates g, beta)
//        compute (fused five-phase step on H_ITER heads, state read once and
//                 written once)
//        store   (FP32 -> FP16, AXI4 burst writes to gmem3)
//   3. done pulses when the last output burst is acknowledged.
// Timing at the defaults (HV=32, D=128, H_ITER=8, PK=16): ~8,300 load cycles with
// a memory that answers every cycle, ~1,400 for the first prepare, 4 x 2,074
// compute cycles and ~1,040 for the last store: about 19,000 cycles per token.
// Interface: start (pulse, while idle) with the eight array base addresses held
// stable during the token; busy; done (pulse); axi_err if a read or write
// response was not OKAY. Four AXI4 master ports, m_axi_gmem0..3, without ID,
// cache, lock, prot or QoS signals.
// The structure (ports, buffers, stage split, channels, GVA pairs, state banks)
// follows the paper's system description; the plain start/done and address ports
// stand in for the host control interface, which the paper does not describe.
module gdn_decode_top
  import gdn_pkg::*;
#(
  parameter int unsigned HV        = 32,
  parameter int unsigned HQK       = 16,
  parameter int unsigned D         = 128,
  parameter int unsigned H_ITER    = 8,
  parameter int unsigned PK        = 16,
  parameter int unsigned ADDR_W    = 64,
  parameter int unsigned MAX_BURST = 256,
  localparam int unsigned N_ITER   = HV / H_ITER,
  localparam int unsigned P        = H_ITER / 2,
  localparam int unsigned QW       = $clog2(HQK * D),
  localparam int unsigned VW       = $clog2(HV * D),
  localparam int unsigned HW       = $clog2(HV),
  localparam int unsigned AW       = $clog2(N_ITER * D * (D / PK))
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  output logic              busy,
  output logic              done,
  output logic              axi_err,
  input  logic [ADDR_W-1:0] q_addr,
  input  logic [ADDR_W-1:0] k_addr,
  input  logic [ADDR_W-1:0] v_addr,
  input  logic [ADDR_W-1:0] alpha_addr,
  input  logic [ADDR_W-1:0] b_addr,
  input  logic [ADDR_W-1:0] a_log_addr,
  input  logic [ADDR_W-1:0] dt_addr,
  input  logic [ADDR_W-1:0] out_addr,
  // gmem0: q, k, v (FP16)
  output logic              m_axi_gmem0_arvalid,
  input  logic              m_axi_gmem0_arready,
  output logic [ADDR_W-1:0] m_axi_gmem0_araddr,
  output logic [7:0]        m_axi_gmem0_arlen,
  output logic [2:0]        m_axi_gmem0_arsize,
  output logic [1:0]        m_axi_gmem0_arburst,
  input  logic              m_axi_gmem0_rvalid,
  output logic              m_axi_gmem0_rready,
  input  logic [15:0]       m_axi_gmem0_rdata,
  input  logic [1:0]        m_axi_gmem0_rresp,
  input  logic              m_axi_gmem0_rlast,
  // gmem1: alpha, b (FP16)
  output logic              m_axi_gmem1_arvalid,
  input  logic              m_axi_gmem1_arready,
  output logic [ADDR_W-1:0] m_axi_gmem1_araddr,
  output logic [7:0]        m_axi_gmem1_arlen,
  output logic [2:0]        m_axi_gmem1_arsize,
  output logic [1:0]        m_axi_gmem1_arburst,
  input  logic              m_axi_gmem1_rvalid,
  output logic              m_axi_gmem1_rready,
  input  logic [15:0]       m_axi_gmem1_rdata,
  input  logic [1:0]        m_axi_gmem1_rresp,
  input  logic              m_axi_gmem1_rlast,
  // gmem2: A_log, dt_bias (FP32)
  output logic              m_axi_gmem2_arvalid,
  input  logic              m_axi_gmem2_arready,
  output logic [ADDR_W-1:0] m_axi_gmem2_araddr,
  output logic [7:0]        m_axi_gmem2_arlen,
  output logic [2:0]        m_axi_gmem2_arsize,
  output logic [1:0]        m_axi_gmem2_arburst,
  input  logic              m_axi_gmem2_rvalid,
  output logic              m_axi_gmem2_rready,
  input  logic [31:0]       m_axi_gmem2_rdata,
  input  logic [1:0]        m_axi_gmem2_rresp,
  input  logic              m_axi_gmem2_rlast,
  // gmem3: outputs (FP16)
  output logic              m_axi_gmem3_awvalid,
  input  logic              m_axi_gmem3_awready,
  output logic [ADDR_W-1:0] m_axi_gmem3_awaddr,
  output logic [7:0]        m_axi_gmem3_awlen,
  output logic [2:0]        m_axi_gmem3_awsize,
  output logic [1:0]        m_axi_gmem3_awburst,
  output logic              m_axi_gmem3_wvalid,
  input  logic              m_axi_gmem3_wready,
  output logic [15:0]       m_axi_gmem3_wdata,
  output logic [1:0]        m_axi_gmem3_wstrb,
  output logic              m_axi_gmem3_wlast,
  input  logic              m_axi_gmem3_bvalid,
  output logic              m_axi_gmem3_bready,
  input  logic [1:0]        m_axi_gmem3_bresp
);
  typedef enum logic [1:0] {T_IDLE, T_LOAD, T_RUN} state_e;
  state_e state;
  logic   tok_start, run;
  logic [2:0] ld_done;

  // ---------------- load: AXI read masters and input buffers ----------------
  logic        r0_valid, r1_valid, r2_valid, r0_done, r1_done, r2_done, r0_busy, r1_busy, r2_busy;
  logic        r0_err, r1_err, r2_err, w_err;
  logic [1:0]  r0_job, r1_job, r2_job;
  logic [31:0] r0_idx, r1_idx, r2_idx;
  logic [15:0] r0_data, r1_data;
  logic [31:0] r2_data, r0_f32, r1_f32;

  axi_read_master #(.NJOBS(3), .DATA_W(16), .ADDR_W(ADDR_W), .MAX_BURST(MAX_BURST)) u_rd0 (
    .clk, .rst_n, .start(tok_start),
    .job_base({v_addr, k_addr, q_addr}),
    .job_len({32'(HV * D), 32'(HQK * D), 32'(HQK * D)}),
    .busy(r0_busy), .done(r0_done),
    .m_axi_arvalid(m_axi_gmem0_arvalid), .m_axi_arready(m_axi_gmem0_arready),
    .m_axi_araddr(m_axi_gmem0_araddr), .m_axi_arlen(m_axi_gmem0_arlen),
    .m_axi_arsize(m_axi_gmem0_arsize), .m_axi_arburst(m_axi_gmem0_arburst),
    .m_axi_rvalid(m_axi_gmem0_rvalid), .m_axi_rready(m_axi_gmem0_rready),
    .m_axi_rdata(m_axi_gmem0_rdata), .m_axi_rresp(m_axi_gmem0_rresp), .m_axi_rlast(m_axi_gmem0_rlast),
    .out_valid(r0_valid), .out_job(r0_job), .out_idx(r0_idx), .out_data(r0_data), .rresp_err(r0_err));

  axi_read_master #(.NJOBS(2), .DATA_W(16), .ADDR_W(ADDR_W), .MAX_BURST(MAX_BURST)) u_rd1 (
    .clk, .rst_n, .start(tok_start),
    .job_base({b_addr, alpha_addr}),
    .job_len({32'(HV), 32'(HV)}),
    .busy(r1_busy), .done(r1_done),
    .m_axi_arvalid(m_axi_gmem1_arvalid), .m_axi_arready(m_axi_gmem1_arready),
    .m_axi_araddr(m_axi_gmem1_araddr), .m_axi_arlen(m_axi_gmem1_arlen),
    .m_axi_arsize(m_axi_gmem1_arsize), .m_axi_arburst(m_axi_gmem1_arburst),
    .m_axi_rvalid(m_axi_gmem1_rvalid), .m_axi_rready(m_axi_gmem1_rready),
    .m_axi_rdata(m_axi_gmem1_rdata), .m_axi_rresp(m_axi_gmem1_rresp), .m_axi_rlast(m_axi_gmem1_rlast),
    .out_valid(r1_valid), .out_job(r1_job), .out_idx(r1_idx), .out_data(r1_data), .rresp_err(r1_err));

  axi_read_master #(.NJOBS(2), .DATA_W(32), .ADDR_W(ADDR_W), .MAX_BURST(MAX_BURST)) u_rd2 (
    .clk, .rst_n, .start(tok_start),
    .job_base({dt_addr, a_log_addr}),
    .job_len({32'(HV), 32'(HV)}),
    .busy(r2_busy), .done(r2_done),
    .m_axi_arvalid(m_axi_gmem2_arvalid), .m_axi_arready(m_axi_gmem2_arready),
    .m_axi_araddr(m_axi_gmem2_araddr), .m_axi_arlen(m_axi_gmem2_arlen),
    .m_axi_arsize(m_axi_gmem2_arsize), .m_axi_arburst(m_axi_gmem2_arburst),
    .m_axi_rvalid(m_axi_gmem2_rvalid), .m_axi_rready(m_axi_gmem2_rready),
    .m_axi_rdata(m_axi_gmem2_rdata), .m_axi_rresp(m_axi_gmem2_rresp), .m_axi_rlast(m_axi_gmem2_rlast),
    .out_valid(r2_valid), .out_job(r2_job), .out_idx(r2_idx), .out_data(r2_data), .rresp_err(r2_err));

  fp16_to_fp32 u_cvt0 (.h(r0_data), .f(r0_f32));
  fp16_to_fp32 u_cvt1 (.h(r1_data), .f(r1_f32));

  logic [QW-1:0] bq_addr, bk_addr;
  logic [VW-1:0] bv_addr;
  logic [HW-1:0] bh_addr;
  logic [31:0]   bq_data, bk_data, bv_data, balpha, bb, balog, bdt;

  gdn_input_buffers #(.HQK(HQK), .HV(HV), .D(D)) u_buf (
    .clk,
    .wr0_en(r0_valid), .wr0_job(r0_job), .wr0_idx(VW'(r0_idx)), .wr0_data(r0_f32),
    .wr1_en(r1_valid), .wr1_job(r1_job[0]), .wr1_idx(HW'(r1_idx)), .wr1_data(r1_f32),
    .wr2_en(r2_valid), .wr2_job(r2_job[0]), .wr2_idx(HW'(r2_idx)), .wr2_data(r2_data),
    .q_addr(bq_addr), .q_data(bq_data), .k_addr(bk_addr), .k_data(bk_data),
    .v_addr(bv_addr), .v_data(bv_data), .h_addr(bh_addr),
    .alpha_data(balpha), .b_data(bb), .a_log_data(balog), .dt_data(bdt));

  // ---------------- prepare stage and its channels ----------------
  logic                 ch_ready, ch_commit, in_valid, in_release, prep_busy, prep_done;
  logic [P*D-1:0]       qk_wr_en;
  logic [H_ITER*D-1:0]  v_wr_en;
  logic [H_ITER-1:0]    gb_wr_en;
  logic [31:0]          q_wr, k_wr, v_wr, g_wr, beta_wr;
  logic [P*D-1:0][31:0]      q_wr_arr, k_wr_arr;
  logic [H_ITER*D-1:0][31:0] v_wr_arr;
  logic [H_ITER-1:0][31:0]   g_wr_arr, beta_wr_arr;
  logic [4:0]                rdy, vld;
  logic [P*D-1:0][31:0]      q_ch, k_ch;
  logic [H_ITER*D-1:0][31:0] v_ch;
  logic [H_ITER-1:0][31:0]   g_ch, beta_ch;

  gdn_prepare #(.HQK(HQK), .HV(HV), .D(D), .H_ITER(H_ITER)) u_prep (
    .clk, .rst_n, .tok_start, .run,
    .q_addr(bq_addr), .q_data(bq_data), .k_addr(bk_addr), .k_data(bk_data),
    .v_addr(bv_addr), .v_data(bv_data), .h_addr(bh_addr),
    .alpha_data(balpha), .b_data(bb), .a_log_data(balog), .dt_data(bdt),
    .ch_ready, .qk_wr_en, .v_wr_en, .q_wr_data(q_wr), .k_wr_data(k_wr), .v_wr_data(v_wr),
    .gb_wr_en, .g_wr_data(g_wr), .beta_wr_data(beta_wr), .ch_commit,
    .busy(prep_busy), .all_done(prep_done));

  always_comb begin
    for (int i = 0; i < P * D; i++)      begin q_wr_arr[i] = q_wr; k_wr_arr[i] = k_wr; end
    for (int i = 0; i < H_ITER * D; i++) v_wr_arr[i] = v_wr;
    for (int i = 0; i < H_ITER; i++)     begin g_wr_arr[i] = g_wr; beta_wr_arr[i] = beta_wr; end
  end
  assign ch_ready = &rdy;
  assign in_valid = &vld;

  gdn_pingpong #(.N(P * D))      u_ch_q (.clk, .rst_n, .wr_en(qk_wr_en), .wr_data(q_wr_arr), .wr_commit(ch_commit),
    .wr_ready(rdy[0]), .rd_valid(vld[0]), .rd_data(q_ch), .rd_release(in_release));
  gdn_pingpong #(.N(P * D))      u_ch_k (.clk, .rst_n, .wr_en(qk_wr_en), .wr_data(k_wr_arr), .wr_commit(ch_commit),
    .wr_ready(rdy[1]), .rd_valid(vld[1]), .rd_data(k_ch), .rd_release(in_release));
  gdn_pingpong #(.N(H_ITER * D)) u_ch_v (.clk, .rst_n, .wr_en(v_wr_en), .wr_data(v_wr_arr), .wr_commit(ch_commit),
    .wr_ready(rdy[2]), .rd_valid(vld[2]), .rd_data(v_ch), .rd_release(in_release));
  gdn_pingpong #(.N(H_ITER))     u_ch_g (.clk, .rst_n, .wr_en(gb_wr_en), .wr_data(g_wr_arr), .wr_commit(ch_commit),
    .wr_ready(rdy[3]), .rd_valid(vld[3]), .rd_data(g_ch), .rd_release(in_release));
  gdn_pingpong #(.N(H_ITER))     u_ch_b (.clk, .rst_n, .wr_en(gb_wr_en), .wr_data(beta_wr_arr), .wr_commit(ch_commit),
    .wr_ready(rdy[4]), .rd_valid(vld[4]), .rd_data(beta_ch), .rd_release(in_release));

  // ---------------- compute stage and persistent state ----------------
  logic                            out_ready, out_commit, out_valid, out_release, comp_busy;
  logic [H_ITER*D-1:0]             out_wr_en;
  logic [H_ITER*D-1:0][31:0]       out_wr_data, out_ch;
  logic                            s_rd_en, s_wr_en;
  logic [AW-1:0]                   s_rd_addr, s_wr_addr;
  logic [H_ITER-1:0][PK-1:0][31:0] s_rd_data, s_wr_data;
  phase_e                          phase;

  gdn_compute #(.D(D), .PK(PK), .H_ITER(H_ITER), .N_ITER(N_ITER)) u_comp (
    .clk, .rst_n, .tok_start, .in_valid, .q(q_ch), .k(k_ch), .v(v_ch), .g(g_ch), .beta(beta_ch),
    .in_release, .out_ready, .out_wr_en, .out_wr_data, .out_commit,
    .s_rd_en, .s_rd_addr, .s_rd_data, .s_wr_en, .s_wr_addr, .s_wr_data,
    .busy(comp_busy), .phase);

  gdn_state_mem #(.H_ITER(H_ITER), .PK(PK), .D(D), .N_ITER(N_ITER)) u_state (
    .clk, .rd_en(s_rd_en), .rd_addr(s_rd_addr), .rd_data(s_rd_data),
    .wr_en(s_wr_en), .wr_addr(s_wr_addr), .wr_data(s_wr_data));

  gdn_pingpong #(.N(H_ITER * D)) u_ch_out (.clk, .rst_n, .wr_en(out_wr_en), .wr_data(out_wr_data),
    .wr_commit(out_commit), .wr_ready(out_ready), .rd_valid(out_valid), .rd_data(out_ch),
    .rd_release(out_release));

  // ---------------- store stage ----------------
  logic store_done, store_busy;
  gdn_store #(.HV(HV), .D(D), .H_ITER(H_ITER), .ADDR_W(ADDR_W), .MAX_BURST(MAX_BURST)) u_store (
    .clk, .rst_n, .tok_start, .out_base(out_addr), .rd_valid(out_valid), .rd_data(out_ch),
    .rd_release(out_release), .all_done(store_done), .busy(store_busy), .bresp_err(w_err),
    .m_axi_awvalid(m_axi_gmem3_awvalid), .m_axi_awready(m_axi_gmem3_awready),
    .m_axi_awaddr(m_axi_gmem3_awaddr), .m_axi_awlen(m_axi_gmem3_awlen),
    .m_axi_awsize(m_axi_gmem3_awsize), .m_axi_awburst(m_axi_gmem3_awburst),
    .m_axi_wvalid(m_axi_gmem3_wvalid), .m_axi_wready(m_axi_gmem3_wready),
    .m_axi_wdata(m_axi_gmem3_wdata), .m_axi_wstrb(m_axi_gmem3_wstrb), .m_axi_wlast(m_axi_gmem3_wlast),
    .m_axi_bvalid(m_axi_gmem3_bvalid), .m_axi_bready(m_axi_gmem3_bready), .m_axi_bresp(m_axi_gmem3_bresp));

  // ---------------- token control ----------------
  assign tok_start = (state == T_IDLE) && start;
  assign run       = (state == T_RUN);
  assign busy      = (state != T_IDLE);
  assign axi_err   = r0_err | r1_err | r2_err | w_err;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= T_IDLE; ld_done <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        T_IDLE: if (start) begin state <= T_LOAD; ld_done <= '0; end
        T_LOAD: begin
          ld_done <= ld_done | {r2_done, r1_done, r0_done};
          if (&(ld_done | {r2_done, r1_done, r0_done})) state <= T_RUN;
        end
        T_RUN: if (store_done && !tok_start) begin
          state <= T_IDLE; done <= 1'b1;
        end
        default: state <= T_IDLE;
      endcase
    end
  end
endmodule
