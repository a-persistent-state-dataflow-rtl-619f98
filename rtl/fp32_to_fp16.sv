// fp32_to_fp16: narrows a binary32 value to binary16 with round-to-nearest-even.
//
// Used by the store stage before the outputs go to the FP16 output port (gmem3).
// The 24-bit significand is shifted so that 10 fraction bits remain (more for
// results in the FP16 subnormal range), then rounded from a guard and a sticky
// bit. Overflow gives infinity, results below half the smallest FP16 subnormal
// give a signed zero, NaN gives the FP16 quiet NaN. Combinational.
// FP16 outputs follow the paper's system diagram; rounding is this design's.
module fp32_to_fp16 (
  input  logic [31:0] f,
  output logic [15:0] h
);
  logic        s;
  logic [7:0]  e;
  logic [22:0] m;
  logic signed [9:0] eh;       // FP16 biased exponent before rounding
  logic [5:0]  sh;             // right shift of the 24-bit significand
  logic [47:0] wide, shd;
  logic [10:0] q;              // kept significand (hidden bit + 10)
  logic        guard, sticky, inc;
  logic [11:0] qr;
  always_comb begin
    {s, e, m} = f;
    eh   = 10'(signed'({2'b0, e})) - 10'sd112;
    // normal: keep 11 of 24 bits (shift 13); subnormal: shift further by 1-eh
    if (eh >= 1)       sh = 6'd13;
    else if (eh > -12) sh = 6'(14 - eh);
    else               sh = 6'd26;
    wide   = {1'b1, m, 24'd0};
    shd    = wide >> sh;
    q      = shd[34:24];
    guard  = shd[23];
    sticky = |shd[22:0];
    inc    = guard & (sticky | q[0]);
    qr     = {1'b0, q} + 12'(inc);
    if (e == 8'hFF)          h = (m == 0) ? {s, 5'h1F, 10'd0} : 16'h7E00;
    else if (e == 8'h00)     h = {s, 15'd0};
    else if (eh >= 31)       h = {s, 5'h1F, 10'd0};
    else if (eh >= 1) begin
      if (qr[11]) h = (eh + 1 >= 31) ? {s, 5'h1F, 10'd0} : {s, 5'(eh + 1), qr[10:1]};
      else        h = {s, 5'(eh), qr[9:0]};
    end else begin
      // subnormal range: exponent field 0, or 1 if rounding reached 2^-14
      h = {s, 5'(qr[10]), qr[9:0]};
    end
  end
endmodule
