// tb_gdn_gate_unit: drives the gate unit with random alpha, b, A_log, dt_bias and
// compares g and beta with the gate formulas evaluated in double precision
// ($exp/$ln of the simulator), to a relative tolerance of 2e-5. Also checks
// the large-dt softplus shortcut, saturated sigmoids, and the latency bound.
module tb_gdn_gate_unit;
  import tb_fp_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  logic [31:0] alpha, b, a_log, dt, g, beta;
  logic busy, done;
  int checks = 0, failures = 0, cyc = 0, max_lat = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  gdn_gate_unit dut (.*);

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real sigm(input real x); return 1.0 / (1.0 + $exp(-x)); endfunction
  function automatic real softp(input real x); return (x > 16.0) ? x : $ln(1.0 + $exp(x)); endfunction

  task automatic run(input real ra, input real rb, input real rl, input real rd);
    real eg, eb;
    int t0;
    alpha = r2f(ra); b = r2f(rb); a_log = r2f(rl); dt = r2f(rd);
    eg = $exp(-sigm(f2r(alpha)) * $exp(f2r(a_log)) * softp(f2r(dt)));
    eb = sigm(f2r(b));
    @(negedge clk) start = 1;
    t0 = cyc;
    @(negedge clk) start = 0;
    while (!done) @(negedge clk);
    if (cyc - t0 > max_lat) max_lat = cyc - t0;
    checks += 2;
    if (!close(f2r(g), eg, 2e-5, 1e-30)) begin
      failures++; $display("g: a=%f l=%f dt=%f got %g exp %g", ra, rl, rd, f2r(g), eg);
    end
    if (!close(f2r(beta), eb, 2e-5, 1e-30)) begin
      failures++; $display("beta: b=%f got %g exp %g", rb, f2r(beta), eb);
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      real ra, rb, rl, rd;
      ra = (real'($urandom_range(2000, 0)) - 1000.0) / 100.0;    // [-10, 10]
      rb = (real'($urandom_range(2000, 0)) - 1000.0) / 100.0;
      rl = (real'($urandom_range(400, 0)) - 300.0) / 100.0;      // [-3, 1]
      rd = (real'($urandom_range(1200, 0)) - 800.0) / 100.0;     // [-8, 4]
      run(ra, rb, rl, rd);
    end
    run(0.0, 0.0, 0.0, 0.0);
    run(3.0, 40.0, -1.0, 20.0);     // softplus shortcut, beta -> 1
    run(-30.0, -30.0, 0.5, 1.0);    // sigmoid near 0
    checks++;
    if (max_lat > 250) begin failures++; $display("latency %0d", max_lat); end
    $display("gate unit latency %0d cycles", max_lat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
