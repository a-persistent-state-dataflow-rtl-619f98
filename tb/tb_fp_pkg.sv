// tb_fp_pkg: reference conversions between binary32/binary16 bit patterns and
// simulator reals, used by the self-checking testbenches to work out expected
// values independently of the RTL arithmetic.
//
// r2f rounds a real (binary64) to binary32 with round-to-nearest-even and flushes
// results below 2^-126 to zero, the convention of the RTL units. Because binary64
// has more than 2*24+2 significand bits, rounding an exact double sum or product
// of two floats a second time to float gives the correctly rounded result.
package tb_fp_pkg;

  function automatic real f2r(input logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'h00) return 0.0;
    if (f[30:23] == 8'hFF) begin
      d = {f[31], 11'h7FF, (f[22:0] != 0), 51'd0};
      return $bitstoreal(d);
    end
    d = {f[31], 11'(f[30:23]) + 11'd896, f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] r2f(input real r);
    logic [63:0] d;
    logic        s, g, st, inc;
    int          e;
    logic [23:0] m;
    d = $realtobits(r);
    s = d[63];
    if (d[62:52] == 11'h7FF) return (d[51:0] != 0) ? 32'h7FC0_0000 : {s, 8'hFF, 23'd0};
    if (d[62:52] == 11'h000) return {s, 31'd0};
    e  = int'(d[62:52]) - 1023 + 127;
    m  = {1'b0, d[51:29]};
    g  = d[28];
    st = |d[27:0];
    inc = g & (st | m[0]);
    m  = m + 24'(inc);
    if (m[23]) begin e = e + 1; m = 24'd0; end
    if (e >= 255) return {s, 8'hFF, 23'd0};
    if (e <= 0)   return {s, 31'd0};
    return {s, 8'(e), m[22:0]};
  endfunction

  function automatic real h2r(input logic [15:0] h);
    real v, p2;
    p2 = 1.0;
    for (int i = 0; i < int'(h[14:10]); i++) p2 = p2 * 2.0;
    if (h[14:10] == 5'h00) v = real'(h[9:0]) / 16777216.0;
    else                   v = (1.0 + real'(h[9:0]) / 1024.0) * p2 / 32768.0;
    return h[15] ? -v : v;
  endfunction

  // nearest-even binary16 encoding of a real (by search over the 2^15 codes'
  // neighbourhood: scale, round, rebuild)
  function automatic logic [15:0] r2h(input real r);
    real a, q, fl;
    int  e;
    logic [15:0] s;
    s = (r < 0.0) ? 16'h8000 : 16'h0000;
    a = (r < 0.0) ? -r : r;
    if (a >= 65520.0) return s | 16'h7C00;
    if (a < 6.103515625e-05) begin          // subnormal: units of 2^-24
      q  = a * 16777216.0;
      fl = $floor(q);
      if (q - fl > 0.5 || (q - fl == 0.5 && int'(fl) % 2 == 1)) fl = fl + 1.0;
      return s | 16'(int'(fl));
    end
    e = 0;
    while (a >= 2.0) begin a = a / 2.0; e++; end
    while (a < 1.0)  begin a = a * 2.0; e--; end
    q  = (a - 1.0) * 1024.0;
    fl = $floor(q);
    if (q - fl > 0.5 || (q - fl == 0.5 && int'(fl) % 2 == 1)) fl = fl + 1.0;
    if (fl >= 1024.0) begin fl = 0.0; e++; end
    if (e + 15 >= 31) return s | 16'h7C00;
    return s | 16'((e + 15) << 10) | 16'(int'(fl));
  endfunction

  function automatic real absr(input real x);
    return (x < 0.0) ? -x : x;
  endfunction

  // |got - exp| <= rel*|exp| + abs_tol
  function automatic bit close(input real got, input real expv, input real rel, input real abs_tol);
    return absr(got - expv) <= rel * absr(expv) + abs_tol;
  endfunction

  // random binary32 with exponent in [127-span, 127+span]
  function automatic logic [31:0] rand_f(input int span);
    int e;
    e = 127 - span + int'($urandom_range(2 * span, 0));
    return {1'($urandom), 8'(e), 23'($urandom)};
  endfunction

endpackage
