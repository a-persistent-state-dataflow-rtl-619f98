// tb_gdn_decode_top: end-to-end test of the decode accelerator at its default
// size (HV=32, HQK=16, D=128, H_ITER=8, PK=16). Four behavioural AXI memories
// with random back-pressure hold the token inputs and receive the outputs.
// NTOK tokens are decoded one after another; for each the testbench computes
// the gates and the GDN recurrence for all 32 heads in double precision from
// the same FP16/FP32 inputs and compares every FP16 output (relative 3e-3 plus
// an absolute floor). Because the state is never reloaded, tokens after the
// first also check that the on-chip state persisted and was updated correctly.
// It also checks the compute-stage interval (2 x 1024 + 3 x 8 cycles plus a few
// of control) and counts the mechanisms the design relies on: overlap of
// prepare with compute and of compute with store, AXI stalls, multi-burst
// arrays, bursts split at a 4 KB boundary, the softplus shortcut, and state
// carried between tokens; each must occur at least once.
module tb_gdn_decode_top;
  import tb_fp_pkg::*;
  localparam int HV = 32, HQK = 16, D = 128, H_ITER = 8;
  localparam int NTOK = 2;
  localparam longint Q_A = 'h0000, K_A = 'h1000, V_A = 'h2300, AL_A = 'h0000, B_A = 'h0100,
                     LG_A = 'h0000, DT_A = 'h0100, O_A = 'h0000;

  logic clk = 0, rst_n = 0, start = 0;
  logic busy, done, axi_err;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc++;

  // AXI wires
  logic a0_arvalid, a0_arready, a0_rvalid, a0_rready, a0_rlast; logic [63:0] a0_araddr; logic [7:0] a0_arlen;
  logic [2:0] a0_arsize; logic [1:0] a0_arburst, a0_rresp; logic [15:0] a0_rdata;
  logic a1_arvalid, a1_arready, a1_rvalid, a1_rready, a1_rlast; logic [63:0] a1_araddr; logic [7:0] a1_arlen;
  logic [2:0] a1_arsize; logic [1:0] a1_arburst, a1_rresp; logic [15:0] a1_rdata;
  logic a2_arvalid, a2_arready, a2_rvalid, a2_rready, a2_rlast; logic [63:0] a2_araddr; logic [7:0] a2_arlen;
  logic [2:0] a2_arsize; logic [1:0] a2_arburst, a2_rresp; logic [31:0] a2_rdata;
  logic a3_awvalid, a3_awready, a3_wvalid, a3_wready, a3_wlast, a3_bvalid, a3_bready;
  logic [63:0] a3_awaddr; logic [7:0] a3_awlen; logic [2:0] a3_awsize; logic [1:0] a3_awburst, a3_bresp, a3_wstrb;
  logic [15:0] a3_wdata;
  logic        nc_b; logic [1:0] nc_b2; logic nc_r; logic [15:0] nc_d16; logic [31:0] nc_d32; logic [1:0] nc_rr;

  gdn_decode_top dut (
    .clk, .rst_n, .start, .busy, .done, .axi_err,
    .q_addr(Q_A), .k_addr(K_A), .v_addr(V_A), .alpha_addr(AL_A), .b_addr(B_A),
    .a_log_addr(LG_A), .dt_addr(DT_A), .out_addr(O_A),
    .m_axi_gmem0_arvalid(a0_arvalid), .m_axi_gmem0_arready(a0_arready), .m_axi_gmem0_araddr(a0_araddr),
    .m_axi_gmem0_arlen(a0_arlen), .m_axi_gmem0_arsize(a0_arsize), .m_axi_gmem0_arburst(a0_arburst),
    .m_axi_gmem0_rvalid(a0_rvalid), .m_axi_gmem0_rready(a0_rready), .m_axi_gmem0_rdata(a0_rdata),
    .m_axi_gmem0_rresp(a0_rresp), .m_axi_gmem0_rlast(a0_rlast),
    .m_axi_gmem1_arvalid(a1_arvalid), .m_axi_gmem1_arready(a1_arready), .m_axi_gmem1_araddr(a1_araddr),
    .m_axi_gmem1_arlen(a1_arlen), .m_axi_gmem1_arsize(a1_arsize), .m_axi_gmem1_arburst(a1_arburst),
    .m_axi_gmem1_rvalid(a1_rvalid), .m_axi_gmem1_rready(a1_rready), .m_axi_gmem1_rdata(a1_rdata),
    .m_axi_gmem1_rresp(a1_rresp), .m_axi_gmem1_rlast(a1_rlast),
    .m_axi_gmem2_arvalid(a2_arvalid), .m_axi_gmem2_arready(a2_arready), .m_axi_gmem2_araddr(a2_araddr),
    .m_axi_gmem2_arlen(a2_arlen), .m_axi_gmem2_arsize(a2_arsize), .m_axi_gmem2_arburst(a2_arburst),
    .m_axi_gmem2_rvalid(a2_rvalid), .m_axi_gmem2_rready(a2_rready), .m_axi_gmem2_rdata(a2_rdata),
    .m_axi_gmem2_rresp(a2_rresp), .m_axi_gmem2_rlast(a2_rlast),
    .m_axi_gmem3_awvalid(a3_awvalid), .m_axi_gmem3_awready(a3_awready), .m_axi_gmem3_awaddr(a3_awaddr),
    .m_axi_gmem3_awlen(a3_awlen), .m_axi_gmem3_awsize(a3_awsize), .m_axi_gmem3_awburst(a3_awburst),
    .m_axi_gmem3_wvalid(a3_wvalid), .m_axi_gmem3_wready(a3_wready), .m_axi_gmem3_wdata(a3_wdata),
    .m_axi_gmem3_wstrb(a3_wstrb), .m_axi_gmem3_wlast(a3_wlast),
    .m_axi_gmem3_bvalid(a3_bvalid), .m_axi_gmem3_bready(a3_bready), .m_axi_gmem3_bresp(a3_bresp));

  axi_mem_model #(.DATA_W(16), .MEM_BYTES(32768)) m0 (.clk, .rst_n,
    .arvalid(a0_arvalid), .arready(a0_arready), .araddr(a0_araddr), .arlen(a0_arlen), .arsize(a0_arsize),
    .arburst(a0_arburst), .rvalid(a0_rvalid), .rready(a0_rready), .rdata(a0_rdata), .rresp(a0_rresp), .rlast(a0_rlast),
    .awvalid(1'b0), .awready(nc_r), .awaddr(64'd0), .awlen(8'd0), .awsize(3'd0), .awburst(2'd0),
    .wvalid(1'b0), .wready(), .wdata(16'd0), .wstrb(2'd0), .wlast(1'b0), .bvalid(), .bready(1'b0), .bresp());
  axi_mem_model #(.DATA_W(16), .MEM_BYTES(4096)) m1 (.clk, .rst_n,
    .arvalid(a1_arvalid), .arready(a1_arready), .araddr(a1_araddr), .arlen(a1_arlen), .arsize(a1_arsize),
    .arburst(a1_arburst), .rvalid(a1_rvalid), .rready(a1_rready), .rdata(a1_rdata), .rresp(a1_rresp), .rlast(a1_rlast),
    .awvalid(1'b0), .awready(), .awaddr(64'd0), .awlen(8'd0), .awsize(3'd0), .awburst(2'd0),
    .wvalid(1'b0), .wready(), .wdata(16'd0), .wstrb(2'd0), .wlast(1'b0), .bvalid(), .bready(1'b0), .bresp());
  axi_mem_model #(.DATA_W(32), .MEM_BYTES(4096)) m2 (.clk, .rst_n,
    .arvalid(a2_arvalid), .arready(a2_arready), .araddr(a2_araddr), .arlen(a2_arlen), .arsize(a2_arsize),
    .arburst(a2_arburst), .rvalid(a2_rvalid), .rready(a2_rready), .rdata(a2_rdata), .rresp(a2_rresp), .rlast(a2_rlast),
    .awvalid(1'b0), .awready(), .awaddr(64'd0), .awlen(8'd0), .awsize(3'd0), .awburst(2'd0),
    .wvalid(1'b0), .wready(), .wdata(32'd0), .wstrb(4'd0), .wlast(1'b0), .bvalid(), .bready(1'b0), .bresp());
  axi_mem_model #(.DATA_W(16), .MEM_BYTES(16384)) m3 (.clk, .rst_n,
    .arvalid(1'b0), .arready(), .araddr(64'd0), .arlen(8'd0), .arsize(3'd0), .arburst(2'd0),
    .rvalid(), .rready(1'b0), .rdata(), .rresp(), .rlast(),
    .awvalid(a3_awvalid), .awready(a3_awready), .awaddr(a3_awaddr), .awlen(a3_awlen), .awsize(a3_awsize),
    .awburst(a3_awburst), .wvalid(a3_wvalid), .wready(a3_wready), .wdata(a3_wdata), .wstrb(a3_wstrb),
    .wlast(a3_wlast), .bvalid(a3_bvalid), .bready(a3_bready), .bresp(a3_bresp));

  // ---------------- mechanism counters ----------------
  int ov_prep_comp = 0, ov_comp_store = 0, n_softplus_short = 0, n_iter_meas = 0;
  longint comp_start_prev = -1;
  int     max_interval = 0, min_interval = 1 << 30;
  logic   comp_busy_q = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_prep.busy && dut.u_comp.busy) ov_prep_comp++;
    if (dut.u_comp.busy && dut.u_store.busy) ov_comp_store++;
    comp_busy_q <= dut.u_comp.busy;
    if (dut.u_comp.busy && !comp_busy_q) comp_start_prev <= cyc;
    if (!dut.u_comp.busy && comp_busy_q) begin
      n_iter_meas++;
      if (int'(cyc - comp_start_prev) > max_interval) max_interval = int'(cyc - comp_start_prev);
      if (int'(cyc - comp_start_prev) < min_interval) min_interval = int'(cyc - comp_start_prev);
    end
  end

  initial begin
    #(64'd10 * 64'd40000 * NTOK + 64'd100000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference state S[h][j][i] and helpers
  real S [HV][D][D];
  function automatic real sigm(input real x); return 1.0 / (1.0 + $exp(-x)); endfunction
  function automatic real softp(input real x); return (x > 16.0) ? x : $ln(1.0 + $exp(x)); endfunction
  function automatic real rnd(input real a);
    return a * (real'($urandom_range(20000, 0)) - 10000.0) / 10000.0;
  endfunction
  task automatic put16(input int which, input longint addr, input logic [15:0] v);
    if (which == 0) begin m0.mem[int'(addr)] = v[7:0]; m0.mem[int'(addr) + 1] = v[15:8]; end
    else            begin m1.mem[int'(addr)] = v[7:0]; m1.mem[int'(addr) + 1] = v[15:8]; end
  endtask
  task automatic put32(input longint addr, input logic [31:0] v);
    for (int b = 0; b < 4; b++) m2.mem[int'(addr) + b] = v[8*b +: 8];
  endtask

  initial begin
    real qr [HQK][D], kr [HQK][D], vr [HV][D], ar [HV], br [HV], lr [HV], dr [HV];
    longint t_start, lat;
    for (int h = 0; h < HV; h++) for (int j = 0; j < D; j++) for (int i = 0; i < D; i++) S[h][j][i] = 0.0;
    repeat (4) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    for (int tok = 0; tok < NTOK; tok++) begin
      // inputs: unit-norm-ish q, k (as after the L2 norm of the layer), v in [-1, 1]
      for (int hq = 0; hq < HQK; hq++) for (int j = 0; j < D; j++) begin
        logic [15:0] hqv, hkv;
        hqv = r2h(rnd(0.18)); hkv = r2h(rnd(0.18));
        put16(0, Q_A + 2 * (hq * D + j), hqv); put16(0, K_A + 2 * (hq * D + j), hkv);
        qr[hq][j] = h2r(hqv); kr[hq][j] = h2r(hkv);
      end
      for (int h = 0; h < HV; h++) begin
        logic [15:0] hv16;
        logic [31:0] f;
        for (int j = 0; j < D; j++) begin
          hv16 = r2h(rnd(1.0)); put16(0, V_A + 2 * (h * D + j), hv16); vr[h][j] = h2r(hv16);
        end
        hv16 = r2h(rnd(4.0)); put16(1, AL_A + 2 * h, hv16); ar[h] = h2r(hv16);
        hv16 = r2h(rnd(4.0)); put16(1, B_A + 2 * h, hv16); br[h] = h2r(hv16);
        f = r2f(rnd(1.0) - 0.5); put32(LG_A + 4 * h, f); lr[h] = f2r(f);
        f = (h == 5) ? r2f(20.0) : r2f(rnd(4.0)); put32(DT_A + 4 * h, f); dr[h] = f2r(f);
        if (dr[h] > 16.0) n_softplus_short++;
      end
      @(negedge clk) start = 1;
      t_start = cyc;
      @(negedge clk) start = 0;
      while (!done) @(negedge clk);
      lat = cyc - t_start;
      $display("token %0d: %0d cycles (paper, H_ITER=8: 18,978)", tok, lat);
      checks++;
      if (lat > 30000 || lat < 4 * 2072) begin failures++; $display("token latency out of range"); end
      checks++;
      if (axi_err) begin failures++; $display("AXI error response"); end
      // reference
      for (int h = 0; h < HV; h++) begin
        real g, bt, r [D], dvv [D], o;
        int  hq;
        hq = h / 2;
        g  = $exp(-sigm(ar[h]) * $exp(lr[h]) * softp(dr[h]));
        bt = sigm(br[h]);
        for (int i = 0; i < D; i++) begin
          r[i] = 0.0;
          for (int j = 0; j < D; j++) r[i] += S[h][j][i] * kr[hq][j];
          dvv[i] = bt * (vr[h][i] - r[i]);
        end
        for (int j = 0; j < D; j++) for (int i = 0; i < D; i++) S[h][j][i] = g * S[h][j][i] + kr[hq][j] * dvv[i];
        for (int i = 0; i < D; i++) begin
          logic [15:0] got;
          o = 0.0;
          for (int j = 0; j < D; j++) o += S[h][j][i] * qr[hq][j];
          o = o / $sqrt(real'(D));
          got = {m3.mem[int'(O_A) + 2 * (h * D + i) + 1], m3.mem[int'(O_A) + 2 * (h * D + i)]};
          checks++;
          if (!close(h2r(got), o, 3e-3, 2e-4)) begin
            failures++;
            if (failures < 10) $display("tok %0d head %0d o[%0d] = %g expected %g", tok, h, i, h2r(got), o);
          end
        end
      end
      repeat (3) @(negedge clk);
    end
    // compute-stage interval per iteration
    checks++;
    if (min_interval < 2 * D * D / 16 + 3 * D / 16 || max_interval > 2110) begin
      failures++; $display("compute interval %0d..%0d", min_interval, max_interval);
    end
    $display("compute interval %0d..%0d cycles over %0d iterations (paper ~2,105)", min_interval, max_interval, n_iter_meas);
    $display("mechanisms: prepare||compute %0d cyc, compute||store %0d cyc, AXI stalls %0d, read bursts %0d, short bursts %0d, write bursts %0d, softplus shortcut heads %0d, tokens with carried state %0d",
      ov_prep_comp, ov_comp_store, m0.stalls + m1.stalls + m2.stalls + m3.stalls, m0.rd_bursts, m0.short_bursts,
      m3.wr_bursts, n_softplus_short, NTOK - 1);
    checks++; if (ov_prep_comp == 0) begin failures++; $display("no prepare/compute overlap"); end
    checks++; if (ov_comp_store == 0) begin failures++; $display("no compute/store overlap"); end
    checks++; if (m0.stalls + m3.stalls == 0) begin failures++; $display("no AXI stall"); end
    checks++; if (m0.rd_bursts <= 3) begin failures++; $display("no multi-burst array"); end
    checks++; if (m0.short_bursts == 0) begin failures++; $display("no 4 KB split"); end
    checks++; if (m0.boundary_errs + m3.boundary_errs != 0) begin failures++; $display("4 KB boundary crossed"); end
    checks++; if (n_softplus_short == 0) begin failures++; $display("no softplus shortcut"); end
    checks++; if (NTOK < 2) begin failures++; $display("no carried state"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
