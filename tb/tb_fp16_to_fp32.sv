// tb_fp16_to_fp32: exhaustive check of the binary16 -> binary32 converter over
// all 65,536 codes against the value of each code worked out as a real.
module tb_fp16_to_fp32;
  import tb_fp_pkg::*;
  logic [15:0] h;
  logic [31:0] f, e;
  int checks = 0, failures = 0;
  fp16_to_fp32 dut (.h(h), .f(f));
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int n = 0; n < 65536; n++) begin
      h = 16'(n);
      #1;
      if (h[14:10] == 5'h1F) e = (h[9:0] == 0) ? {h[15], 8'hFF, 23'd0} : 32'h7FC0_0000;
      else                   e = r2f(h2r(h));
      checks++;
      if (f !== e) begin
        failures++;
        if (failures < 10) $display("h=%h f=%h expected %h", h, f, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
