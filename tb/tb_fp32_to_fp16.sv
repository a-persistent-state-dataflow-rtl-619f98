// tb_fp32_to_fp16: checks binary32 -> binary16 rounding (nearest-even, FP16
// subnormals, overflow) against a real-valued reference on random values
// spanning the FP16 range, exact ties, and special values.
module tb_fp32_to_fp16;
  import tb_fp_pkg::*;
  logic [31:0] f;
  logic [15:0] h, e;
  int checks = 0, failures = 0;
  fp32_to_fp16 dut (.f(f), .h(h));
  task automatic check(input logic [31:0] tf, input logic [15:0] te);
    f = tf;
    #1;
    checks++;
    if (h !== te) begin
      failures++;
      if (failures < 10) $display("f=%h h=%h expected %h", tf, h, te);
    end
  endtask
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int n = 0; n < 30000; n++) begin
      logic [31:0] x;
      x = {1'($urandom), 8'(int'($urandom_range(145, 97))), 23'($urandom)};
      if (n % 3 == 0) x[12:0] = 13'h1000;            // exact tie in the normal range
      check(x, r2h(f2r(x)));
    end
    check(32'h3F80_0000, 16'h3C00);  // 1.0
    check(32'h477F_F000, 16'h7C00);  // 65535 -> inf (rounds above max)
    check(32'h7F80_0000, 16'h7C00);  // inf
    check(32'h7FC0_0000, 16'h7E00);  // NaN
    check(32'h3380_0000, 16'h0001);  // 2^-24, smallest subnormal
    check(32'h3300_0000, 16'h0000);  // 2^-25 tie -> 0
    check(32'h0000_0000, 16'h0000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
