// tb_gdn_prepare: loads random q, k, v, alpha, b, A_log, dt into input buffers,
// runs the prepare stage over the N_ITER iterations of a token while holding
// the channel-ready signal low at random, and at each commit checks the
// captured channel contents: the q/k slices of the iteration's GVA pairs, the v
// slices of its heads, and g, beta against the gate formulas in double precision.
module tb_gdn_prepare;
  import tb_fp_pkg::*;
  localparam int HQK = 4, HV = 8, D = 16, H_ITER = 4, P = H_ITER / 2, N_ITER = HV / H_ITER;
  logic clk = 0, rst_n = 0, tok_start = 0, run = 0, ch_ready = 0;
  logic wr0_en = 0, wr1_en = 0, wr2_en = 0, wr1_job = 0, wr2_job = 0;
  logic [1:0] wr0_job = 0;
  logic [6:0] wr0_idx = 0;
  logic [2:0] wr1_idx = 0, wr2_idx = 0;
  logic [31:0] wr0_data = 0, wr1_data = 0, wr2_data = 0;
  logic [5:0] q_addr, k_addr; logic [6:0] v_addr; logic [2:0] h_addr;
  logic [31:0] q_data, k_data, v_data, alpha_data, b_data, a_log_data, dt_data;
  logic [P*D-1:0] qk_wr_en; logic [H_ITER*D-1:0] v_wr_en; logic [H_ITER-1:0] gb_wr_en;
  logic [31:0] q_wr_data, k_wr_data, v_wr_data, g_wr_data, beta_wr_data;
  logic ch_commit, busy, all_done;
  logic [31:0] mq [HQK*D], mk [HQK*D], mv [HV*D], ma [HV], mb [HV], ml [HV], md [HV];
  logic [31:0] cq [P*D], ck [P*D], cv [H_ITER*D], cg [H_ITER], cb [H_ITER];
  int checks = 0, failures = 0, n_commit = 0;
  always #5 clk = ~clk;

  gdn_input_buffers #(.HQK(HQK), .HV(HV), .D(D)) u_buf (.*);
  gdn_prepare #(.HQK(HQK), .HV(HV), .D(D), .H_ITER(H_ITER)) dut (.*);

  function automatic real sigm(input real x); return 1.0 / (1.0 + $exp(-x)); endfunction
  function automatic real softp(input real x); return (x > 16.0) ? x : $ln(1.0 + $exp(x)); endfunction

  always @(posedge clk) begin
    for (int i = 0; i < P * D; i++) if (qk_wr_en[i]) begin cq[i] <= q_wr_data; ck[i] <= k_wr_data; end
    for (int i = 0; i < H_ITER * D; i++) if (v_wr_en[i]) cv[i] <= v_wr_data;
    for (int i = 0; i < H_ITER; i++) if (gb_wr_en[i]) begin cg[i] <= g_wr_data; cb[i] <= beta_wr_data; end
    checks++;
    if ((|qk_wr_en || |v_wr_en || |gb_wr_en || ch_commit) && !ch_ready && !busy) begin
      failures++; $display("write without a free channel bank");
    end
  end

  // at each commit compare the captured bank with the expected slices
  always @(negedge clk) if (ch_commit) begin
    int n;
    n = n_commit;
    for (int i = 0; i < P * D; i++) begin
      checks += 2;
      if (cq[i] !== mq[n * P * D + i]) begin failures++; $display("it %0d q[%0d]", n, i); end
      if (ck[i] !== mk[n * P * D + i]) begin failures++; $display("it %0d k[%0d]", n, i); end
    end
    for (int i = 0; i < H_ITER * D; i++) begin
      checks++;
      if (cv[i] !== mv[n * H_ITER * D + i]) begin failures++; $display("it %0d v[%0d]", n, i); end
    end
    for (int h = 0; h < H_ITER; h++) begin
      int hh;
      real eg, eb;
      hh = n * H_ITER + h;
      eg = $exp(-sigm(f2r(ma[hh])) * $exp(f2r(ml[hh])) * softp(f2r(md[hh])));
      eb = sigm(f2r(mb[hh]));
      checks += 2;
      if (!close(f2r(cg[h]), eg, 2e-5, 1e-30)) begin failures++; $display("it %0d g[%0d] %g vs %g", n, h, f2r(cg[h]), eg); end
      if (!close(f2r(cb[h]), eb, 2e-5, 1e-30)) begin failures++; $display("it %0d beta[%0d]", n, h); end
    end
    n_commit++;
  end

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < HQK * D; i++) begin mq[i] = $urandom; mk[i] = $urandom; end
    for (int i = 0; i < HV * D; i++) mv[i] = $urandom;
    for (int h = 0; h < HV; h++) begin
      ma[h] = r2f((real'($urandom_range(2000, 0)) - 1000.0) / 200.0);
      mb[h] = r2f((real'($urandom_range(2000, 0)) - 1000.0) / 200.0);
      ml[h] = r2f((real'($urandom_range(2000, 0)) - 1500.0) / 1000.0);
      md[h] = r2f((real'($urandom_range(2000, 0)) - 1000.0) / 250.0);
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < HQK * D; i++) begin
      @(negedge clk); wr0_en = 1; wr0_job = 0; wr0_idx = 7'(i); wr0_data = mq[i];
      @(negedge clk); wr0_job = 1; wr0_data = mk[i];
    end
    for (int i = 0; i < HV * D; i++) begin @(negedge clk); wr0_job = 2; wr0_idx = 7'(i); wr0_data = mv[i]; end
    @(negedge clk); wr0_en = 0;
    for (int h = 0; h < HV; h++) begin
      @(negedge clk); wr1_en = 1; wr1_job = 0; wr1_idx = 3'(h); wr1_data = ma[h];
      wr2_en = 1; wr2_job = 0; wr2_idx = 3'(h); wr2_data = ml[h];
      @(negedge clk); wr1_job = 1; wr1_data = mb[h]; wr2_job = 1; wr2_data = md[h];
    end
    @(negedge clk); wr1_en = 0; wr2_en = 0;
    @(negedge clk) tok_start = 1;
    @(negedge clk) tok_start = 0; run = 1;
    while (!all_done) begin
      // channel free only some of the time, and never changes during a run
      if (!busy) ch_ready = ($urandom_range(3, 0) == 0);
      @(negedge clk);
    end
    checks++;
    if (n_commit != N_ITER) begin failures++; $display("%0d commits", n_commit); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
