// fp32_add: combinational IEEE-754 binary32 adder used by the MAC lanes, the
// adder trees and accumulators of the processing elements and the gate unit.
//
// The operand of larger magnitude is kept, the other is aligned right with guard,
// round and sticky bits, the significands are added or subtracted, the sum is
// renormalised (one place right, or left by the leading-zero count) and rounded
// to nearest-even. Subnormal operands count as zero and results below the
// smallest normal flush to zero; an exact cancellation gives +0 (-0 only for
// -0 + -0). NaN in, or inf - inf, gives the canonical quiet NaN.
// Interface: a, b in, y = a + b out, combinational.
// The paper fixes only FP32; rounding, flush-to-zero and the single-cycle form
// (an HLS adder is ~5 cycles deep) are this design's choices.
module fp32_add (
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);
  logic        sa, sb, sx, sz;
  logic [7:0]  ea, eb, ex, ez;
  logic [22:0] fa, fb, fx, fz;
  logic        a_nan, b_nan, a_inf, b_inf, a_zero, b_zero, swap;
  logic [7:0]  d;
  logic [26:0] mx, mz, mz_sh;
  logic [27:0] sum;
  logic [26:0] nrm;
  logic [4:0]  lz;
  logic signed [9:0] e_n, e_r;
  logic [23:0] mant;
  logic        inc;
  logic [24:0] mant_r;
  logic        sticky;

  always_comb begin
    {sa, ea, fa} = a;
    {sb, eb, fb} = b;
    a_nan  = (ea == 8'hFF) && (fa != 0);
    b_nan  = (eb == 8'hFF) && (fb != 0);
    a_inf  = (ea == 8'hFF) && (fa == 0);
    b_inf  = (eb == 8'hFF) && (fb == 0);
    a_zero = (ea == 8'h00);
    b_zero = (eb == 8'h00);
    swap   = {eb, fb} > {ea, fa};
    {sx, ex, fx} = swap ? b : a;
    {sz, ez, fz} = swap ? a : b;
    d      = ex - ez;
    mx     = {1'b1, fx, 3'b000};
    mz     = {1'b1, fz, 3'b000};
    sticky = 1'b0;
    // align the smaller operand, folding shifted-out bits into the sticky bit
    if (d >= 8'd27) begin
      mz_sh = 27'd1;
    end else begin
      mz_sh  = mz >> d;
      sticky = |(mz & ((27'd1 << d) - 27'd1));
      mz_sh[0] = mz_sh[0] | sticky;
    end
    if (sx == sz) sum = {1'b0, mx} + {1'b0, mz_sh};
    else          sum = {1'b0, mx} - {1'b0, mz_sh};
    lz = 5'd0;
    for (int i = 0; i <= 26; i++) begin
      if (sum[i]) lz = 5'(26 - i);
    end
    if (sum[27]) begin
      nrm = sum[27:1];
      nrm[0] = nrm[0] | sum[0];
      e_n = 10'(signed'({2'b0, ex})) + 10'sd1;
    end else begin
      nrm = sum[26:0] << lz;
      e_n = 10'(signed'({2'b0, ex})) - 10'(signed'({5'b0, lz}));
    end
    mant   = nrm[26:3];
    inc    = nrm[2] & ((nrm[1] | nrm[0]) | mant[0]);
    mant_r = {1'b0, mant} + 25'(inc);
    e_r    = mant_r[24] ? e_n + 10'sd1 : e_n;

    if (a_nan || b_nan || (a_inf && b_inf && (sa != sb))) y = gdn_pkg::FP32_QNAN;
    else if (a_inf)                                        y = a;
    else if (b_inf)                                        y = b;
    else if (a_zero && b_zero)                             y = {sa & sb, 31'd0};
    else if (a_zero)                                       y = b;
    else if (b_zero)                                       y = a;
    else if (sum == 28'd0)                                 y = 32'd0;
    else if (e_n <= 0)                                     y = {sx, 31'd0};
    else if (e_r >= 255)                                   y = {sx, 8'hFF, 23'd0};
    else if (mant_r[24])                                   y = {sx, e_r[7:0], mant_r[23:1]};
    else                                                   y = {sx, e_r[7:0], mant_r[22:0]};
  end
endmodule
