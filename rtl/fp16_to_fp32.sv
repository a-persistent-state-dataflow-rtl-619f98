// fp16_to_fp32: widens an IEEE-754 binary16 value to binary32, exactly.
//
// Sits between the FP16 AXI read ports (q, k, v on gmem0; alpha, b on gmem1) and
// the on-chip input buffers, which hold FP32. Normal numbers re-bias the
// exponent (15 -> 127) and pad the fraction; FP16 subnormals are normalised with
// a leading-zero count (they are normal numbers in FP32); inf and NaN map to
// inf and quiet NaN. Combinational: h in, f out in the same cycle.
// The converter and the FP16 port format are as drawn in the paper's system
// diagram; the handling of special values is this design's.
module fp16_to_fp32 (
  input  logic [15:0] h,
  output logic [31:0] f
);
  logic        s;
  logic [4:0]  e;
  logic [9:0]  m;
  logic [3:0]  lz;
  logic [9:0]  mn;
  always_comb begin
    {s, e, m} = h;
    lz = 4'd0;
    for (int i = 0; i < 10; i++) begin
      if (m[i]) lz = 4'(9 - i);
    end
    mn = m << (lz + 4'd1);
    if (e == 5'h1F)      f = (m == 0) ? {s, 8'hFF, 23'd0} : gdn_pkg::FP32_QNAN;
    else if (e != 5'h00) f = {s, 8'(e) + 8'd112, m, 13'd0};
    else if (m == 10'd0) f = {s, 31'd0};
    else                 f = {s, 8'd112 - 8'(lz), mn, 13'd0};
  end
endmodule
