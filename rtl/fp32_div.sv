// fp32_div: sequential binary32 divider (q = a / b), used by the gate unit for
// the sigmoid 1/(1+exp(-x)) and by the logarithm unit.
//
// Restoring division of the two 24-bit significands produces one quotient bit
// per cycle, 27 bits in all (24 kept, guard, and two more folded with the final
// remainder into a sticky bit), then rounds to nearest-even. Special operands
// (NaN, inf, zero; subnormals count as zero) are resolved on the start cycle.
// Interface: pulse start with a, b; done pulses with q valid 28 cycles later
// (1 cycle for special operands). busy is high in between; start is ignored
// while busy. The paper does not describe a divider; it is this design's way to
// build the sigmoid of the gate formula.
module fp32_div (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic        busy,
  output logic        done,
  output logic [31:0] q
);
  logic        sq;
  logic signed [10:0] eq;
  logic [24:0] rem;
  logic [23:0] div;
  logic [26:0] quo;
  logic [4:0]  cnt;
  logic [24:0] diff;

  // rounding of the finished quotient
  logic        top;
  logic [23:0] mant;
  logic        guard, sticky, inc;
  logic [24:0] mant_r;
  logic signed [10:0] e_n, e_r;
  logic [31:0] q_fin;
  always_comb begin
    diff   = rem - {1'b0, div};
    top    = quo[26];
    mant   = top ? quo[26:3] : quo[25:2];
    guard  = top ? quo[2] : quo[1];
    sticky = (top ? |quo[1:0] : quo[0]) | (rem != 0);
    e_n    = top ? eq : eq - 11'sd1;
    inc    = guard & (sticky | mant[0]);
    mant_r = {1'b0, mant} + 25'(inc);
    e_r    = mant_r[24] ? e_n + 11'sd1 : e_n;
    if (e_n <= 0)        q_fin = {sq, 31'd0};
    else if (e_r >= 255) q_fin = {sq, 8'hFF, 23'd0};
    else if (mant_r[24]) q_fin = {sq, e_r[7:0], mant_r[23:1]};
    else                 q_fin = {sq, e_r[7:0], mant_r[22:0]};
  end

  logic a_nan, b_nan, a_inf, b_inf, a_zero, b_zero;
  always_comb begin
    a_nan  = (a[30:23] == 8'hFF) && (a[22:0] != 0);
    b_nan  = (b[30:23] == 8'hFF) && (b[22:0] != 0);
    a_inf  = (a[30:23] == 8'hFF) && (a[22:0] == 0);
    b_inf  = (b[30:23] == 8'hFF) && (b[22:0] == 0);
    a_zero = (a[30:23] == 8'h00);
    b_zero = (b[30:23] == 8'h00);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; q <= '0;
      sq <= 1'b0; eq <= '0; rem <= '0; div <= '0; quo <= '0; cnt <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        sq <= a[31] ^ b[31];
        if (a_nan || b_nan || (a_inf && b_inf) || (a_zero && b_zero)) begin
          q <= gdn_pkg::FP32_QNAN; done <= 1'b1;
        end else if (a_inf || b_zero) begin
          q <= {a[31] ^ b[31], 8'hFF, 23'd0}; done <= 1'b1;
        end else if (a_zero || b_inf) begin
          q <= {a[31] ^ b[31], 31'd0}; done <= 1'b1;
        end else begin
          eq   <= 11'(signed'({3'b0, a[30:23]})) - 11'(signed'({3'b0, b[30:23]})) + 11'sd127;
          rem  <= {1'b0, 1'b1, a[22:0]};
          div  <= {1'b1, b[22:0]};
          quo  <= '0;
          cnt  <= 5'd27;
          busy <= 1'b1;
        end
      end else if (busy) begin
        if (cnt != 0) begin
          if (!diff[24]) begin
            quo <= {quo[25:0], 1'b1};
            rem <= {diff[23:0], 1'b0};
          end else begin
            quo <= {quo[25:0], 1'b0};
            rem <= {rem[23:0], 1'b0};
          end
          cnt <= cnt - 5'd1;
        end else begin
          q    <= q_fin;
          done <= 1'b1;
          busy <= 1'b0;
        end
      end
    end
  end
endmodule
