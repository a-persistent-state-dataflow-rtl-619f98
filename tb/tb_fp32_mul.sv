// tb_fp32_mul: checks the binary32 multiplier bit-exactly against the simulator's
// double-precision product rounded to binary32 (flush-to-zero convention), on
// random operands, operands that overflow and underflow, and special values.
module tb_fp32_mul;
  import tb_fp_pkg::*;
  logic [31:0] a, b, y, e;
  int checks = 0, failures = 0;
  fp32_mul dut (.a(a), .b(b), .y(y));

  task automatic check(input logic [31:0] ta, input logic [31:0] tb_, input logic [31:0] te);
    a = ta; b = tb_;
    #1;
    checks++;
    if (y !== te) begin
      failures++;
      if (failures < 10) $display("mul %h * %h = %h expected %h", ta, tb_, y, te);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 20000; n++) begin
      logic [31:0] x, z;
      x = rand_f((n % 4 == 0) ? 126 : 20);
      z = rand_f((n % 4 == 0) ? 126 : 20);
      check(x, z, r2f(f2r(x) * f2r(z)));
    end
    check(32'h3F80_0000, 32'h4000_0000, 32'h4000_0000);   // 1*2
    check(32'h7F80_0000, 32'h0000_0000, 32'h7FC0_0000);   // inf*0
    check(32'hFF80_0000, 32'h4000_0000, 32'hFF80_0000);   // -inf*2
    check(32'h7F7F_FFFF, 32'h4000_0000, 32'h7F80_0000);   // overflow
    check(32'h0080_0000, 32'h3F00_0000, 32'h0000_0000);   // underflow flush
    check(32'h0000_0001, 32'h4000_0000, 32'h0000_0000);   // subnormal in
    check(32'h7FC0_0001, 32'h4000_0000, 32'h7FC0_0000);   // NaN
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
