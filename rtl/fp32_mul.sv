// fp32_mul: combinational IEEE-754 binary32 multiplier, the multiply half of every
// MAC lane in the processing elements, the q/k dot-product unit and the gate unit.
//
// The 24x24-bit significand product is normalised by at most one place and
// rounded to nearest-even from a guard bit and a sticky bit. Subnormal operands
// count as zero and results below the smallest normal are flushed to a signed
// zero (the FPGA FP cores are usually configured the same way). NaN in gives the
// canonical quiet NaN; inf*0 gives NaN; overflow gives a signed infinity.
// Interface: a, b in, y out, no clock: the result is valid in the same cycle.
// The paper only says the design computes in FP32; rounding, subnormal handling
// and the single-cycle (unpipelined) form are this design's choices.
module fp32_mul (
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);
  logic        sa, sb, sy;
  logic [7:0]  ea, eb;
  logic [22:0] fa, fb;
  logic        a_nan, b_nan, a_inf, b_inf, a_zero, b_zero;
  logic [47:0] prod;
  logic [23:0] mant;
  logic        guard, sticky, inc;
  logic [24:0] mant_r;
  logic signed [10:0] e_n, e_r;

  always_comb begin
    {sa, ea, fa} = a;
    {sb, eb, fb} = b;
    sy     = sa ^ sb;
    a_nan  = (ea == 8'hFF) && (fa != 0);
    b_nan  = (eb == 8'hFF) && (fb != 0);
    a_inf  = (ea == 8'hFF) && (fa == 0);
    b_inf  = (eb == 8'hFF) && (fb == 0);
    a_zero = (ea == 8'h00);
    b_zero = (eb == 8'h00);
    prod   = {1'b1, fa} * {1'b1, fb};
    if (prod[47]) begin
      mant   = prod[47:24];
      guard  = prod[23];
      sticky = |prod[22:0];
      e_n    = 11'(signed'({3'b0, ea})) + 11'(signed'({3'b0, eb})) - 11'sd126;
    end else begin
      mant   = prod[46:23];
      guard  = prod[22];
      sticky = |prod[21:0];
      e_n    = 11'(signed'({3'b0, ea})) + 11'(signed'({3'b0, eb})) - 11'sd127;
    end
    inc    = guard & (sticky | mant[0]);
    mant_r = {1'b0, mant} + 25'(inc);
    e_r    = mant_r[24] ? e_n + 11'sd1 : e_n;

    if (a_nan || b_nan || (a_inf && b_zero) || (b_inf && a_zero)) y = gdn_pkg::FP32_QNAN;
    else if (a_inf || b_inf)                                         y = {sy, 8'hFF, 23'd0};
    else if (a_zero || b_zero)                                       y = {sy, 31'd0};
    else if (e_n <= 0)                                               y = {sy, 31'd0};
    else if (e_r >= 255)                                             y = {sy, 8'hFF, 23'd0};
    else if (mant_r[24])                                             y = {sy, e_r[7:0], mant_r[23:1]};
    else                                                             y = {sy, e_r[7:0], mant_r[22:0]};
  end
endmodule
