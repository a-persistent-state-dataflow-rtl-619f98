// tb_compute_harness: self-checking harness for the compute stage together with
// the persistent state memory (and so the GVA groups and PEs inside). It plays
// the prepare stage (random q, k, v, g, beta into the input channel) and the
// store stage (reads and releases the out channel), runs NTOK tokens of N_ITER
// iterations, and checks every output and, at the end, every state word against
// a double-precision model of the GDN recurrence
//   r = S^T k, dv = beta (v - r), S = g S + k dv^T, o = S^T q / sqrt(D)
// computed in its textbook (three-pass) form. The state is checked through the
// outputs of the later tokens, which depend on every state word. It also checks the cycles per
// iteration against 2*D*D/PK + 3*D/PK plus at most 8 cycles of overhead.
module tb_compute_harness #(
  parameter int unsigned D      = 32,
  parameter int unsigned PK     = 8,
  parameter int unsigned H_ITER = 4,
  parameter int unsigned N_ITER = 2,
  parameter int unsigned NTOK   = 2
);
  import tb_fp_pkg::*;
  import gdn_pkg::*;
  localparam int unsigned P  = H_ITER / 2;
  localparam int unsigned T  = D / PK;
  localparam int unsigned HV = H_ITER * N_ITER;
  localparam int unsigned AW = $clog2(N_ITER * D * T);

  logic clk = 0, rst_n = 0, tok_start = 0;
  logic in_valid = 0, in_release, out_ready = 1, out_commit, busy;
  logic [P-1:0][D-1:0][31:0]      q, k;
  logic [H_ITER-1:0][D-1:0][31:0] v;
  logic [H_ITER-1:0][31:0]        g, beta;
  logic [H_ITER*D-1:0]            out_wr_en;
  logic [H_ITER*D-1:0][31:0]      out_wr_data;
  logic s_rd_en, s_wr_en;
  logic [AW-1:0] s_rd_addr, s_wr_addr;
  logic [H_ITER-1:0][PK-1:0][31:0] s_rd_data, s_wr_data;
  phase_e phase;
  logic [31:0] ocap [H_ITER*D];

  int checks = 0, failures = 0, cyc = 0;
  real S [HV][D][D];     // S[h][j][i]
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  gdn_compute #(.D(D), .PK(PK), .H_ITER(H_ITER), .N_ITER(N_ITER)) dut (.*);
  gdn_state_mem #(.H_ITER(H_ITER), .PK(PK), .D(D), .N_ITER(N_ITER)) u_mem (
    .clk, .rd_en(s_rd_en), .rd_addr(s_rd_addr), .rd_data(s_rd_data),
    .wr_en(s_wr_en), .wr_addr(s_wr_addr), .wr_data(s_wr_data));

  always @(posedge clk) begin
    for (int i = 0; i < H_ITER * D; i++) if (out_wr_en[i]) ocap[i] <= out_wr_data[i];
  end

  function automatic real rnd(input real a);
    return a * (real'($urandom_range(20000, 0)) - 10000.0) / 10000.0;
  endfunction

  initial begin
    #(64'd10 * 64'd20000 * D * D / PK * N_ITER * NTOK + 64'd1000000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int h = 0; h < HV; h++) for (int j = 0; j < D; j++) for (int i = 0; i < D; i++) S[h][j][i] = 0.0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int tok = 0; tok < NTOK; tok++) begin
      @(negedge clk) tok_start = 1;
      @(negedge clk) tok_start = 0;
      for (int n = 0; n < N_ITER; n++) begin
        int t0, t1;
        real qr [P][D], kr [P][D], vr [H_ITER][D], gr [H_ITER], br [H_ITER];
        for (int p = 0; p < P; p++) for (int j = 0; j < D; j++) begin
          q[p][j] = r2f(rnd(1.0)); k[p][j] = r2f(rnd(1.0) / 4.0);
          qr[p][j] = f2r(q[p][j]); kr[p][j] = f2r(k[p][j]);
        end
        for (int h = 0; h < H_ITER; h++) begin
          for (int j = 0; j < D; j++) begin v[h][j] = r2f(rnd(2.0)); vr[h][j] = f2r(v[h][j]); end
          g[h] = r2f(0.5 + real'($urandom_range(1000, 0)) / 2000.0);
          beta[h] = r2f(real'($urandom_range(1000, 0)) / 1000.0);
          gr[h] = f2r(g[h]); br[h] = f2r(beta[h]);
        end
        in_valid = 1;
        t0 = cyc;
        while (!in_release) @(negedge clk);
        t1 = cyc;
        in_valid = 0;
        checks++;
        if (t1 - t0 > 2 * D * D / PK + 3 * D / PK + 8 || t1 - t0 < 2 * D * D / PK + 3 * D / PK) begin
          failures++; $display("iteration took %0d cycles", t1 - t0);
        end
        if (tok == 0 && n == 0) $display("iteration cycles: %0d", t1 - t0);
        // reference for the H_ITER heads of this iteration
        for (int hh = 0; hh < H_ITER; hh++) begin
          int h;
          real r [D], dvv [D], o;
          h = n * H_ITER + hh;
          for (int i = 0; i < D; i++) begin
            r[i] = 0.0;
            for (int j = 0; j < D; j++) r[i] += S[h][j][i] * kr[hh/2][j];
            dvv[i] = br[hh] * (vr[hh][i] - r[i]);
          end
          for (int j = 0; j < D; j++) for (int i = 0; i < D; i++)
            S[h][j][i] = gr[hh] * S[h][j][i] + kr[hh/2][j] * dvv[i];
          for (int i = 0; i < D; i++) begin
            o = 0.0;
            for (int j = 0; j < D; j++) o += S[h][j][i] * qr[hh/2][j];
            o = o / $sqrt(real'(D));
            checks++;
            if (!close(f2r(ocap[hh * D + i]), o, 1e-4, 1e-5)) begin
              failures++;
              if (failures < 10) $display("tok %0d it %0d head %0d o[%0d] = %g expected %g", tok, n, hh, i, f2r(ocap[hh*D+i]), o);
            end
          end
        end
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
