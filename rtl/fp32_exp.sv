// fp32_exp: sequential binary32 exponential, e^x, for the gate unit.
//
// Method: y = x*log2(e) is split in fixed point (24 fraction bits) into an integer
// n = round(y) and a fraction f = y - n in [-0.5, 0.5]; 2^f is evaluated by a
// degree-7 Taylor polynomial in Horner form, c_k = (ln 2)^k / k!, and n is added
// to the exponent of the result. Each step is one pass through a multiply then
// an add (one fp32_mul and one fp32_add). The relative error is a few ulp for
// |x| < 10 and grows to ~1e-5 near the range ends (the rounding of y is scaled by
// |y|). x > 88.72 gives +inf, x < -87.33 gives 0, NaN gives NaN.
// Interface: pulse start with x; done pulses with y valid 10 cycles later.
// The paper gives only the gate formula; this unit is this design's own.
module fp32_exp (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [31:0] x,
  output logic        busy,
  output logic        done,
  output logic [31:0] y
);
  typedef enum logic [1:0] {E_IDLE, E_SPLIT, E_POLY, E_SCALE} state_e;
  state_e state;
  logic [31:0] yv, fv, pv;
  logic signed [9:0]  n;
  logic [2:0]  k;
  logic [31:0] m_a, m_b, m_y, a_b, a_y;

  fp32_mul u_mul (.a(m_a), .b(m_b), .y(m_y));
  fp32_add u_add (.a(m_y), .b(a_b), .y(a_y));

  function automatic logic [31:0] coef(input logic [2:0] i);
    case (i)
      3'd0: return 32'h3F80_0000;
      3'd1: return 32'h3F31_7218;
      3'd2: return 32'h3E75_FDF0;
      3'd3: return 32'h3D63_5847;
      3'd4: return 32'h3C1D_955B;
      3'd5: return 32'h3AAE_C3FF;
      3'd6: return 32'h3921_8489;
      default: return 32'h377F_E5FE;
    endcase
  endfunction

  // fixed-point split of yv (|yv| < 128)
  logic signed [8:0]  ye;
  logic [39:0] mag;
  logic signed [40:0] yfix, rfix, ffix;
  logic signed [16:0] nn;
  logic [23:0] fabs;
  logic [4:0]  lz;
  always_comb begin
    ye   = 9'(signed'({1'b0, yv[30:23]})) - 9'sd127 + 9'sd1;   // shift of mant for 2^24 scale
    if (yv[30:23] == 8'h00) mag = '0;
    else if (ye >= 0)       mag = 40'({1'b1, yv[22:0]}) << ye;
    else if (ye > -25)      mag = 40'({1'b1, yv[22:0]}) >> (-ye);
    else                    mag = '0;
    yfix = yv[31] ? -$signed({1'b0, mag}) : $signed({1'b0, mag});
    rfix = yfix + 41'sd8388608;                                 // + 0.5
    nn   = 17'(rfix >>> 24);
    ffix = yfix - ($signed(41'(nn)) <<< 24);                    // in [-2^23, 2^23]
    fabs = ffix[40] ? 24'(-ffix) : 24'(ffix);
    lz   = 5'd0;
    for (int i = 0; i < 24; i++) if (fabs[i]) lz = 5'(23 - i);
  end
  // normalised fraction bits of fabs (drop the leading one)
  logic [46:0] fsh;
  assign fsh = {23'd0, fabs} << (lz + 5'd1);

  always_comb begin
    m_a = pv; m_b = fv; a_b = coef(k);
    if (state == E_IDLE) begin m_a = x; m_b = gdn_pkg::FP32_LOG2E; a_b = 32'd0; end
  end

  logic signed [9:0] e_new;
  assign e_new = 10'(signed'({2'b0, pv[30:23]})) + n;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= E_IDLE; busy <= 1'b0; done <= 1'b0; y <= '0;
      yv <= '0; fv <= '0; pv <= '0; n <= '0; k <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        E_IDLE: if (start) begin
          if (x[30:23] == 8'hFF && x[22:0] != 0) begin y <= gdn_pkg::FP32_QNAN; done <= 1'b1; end
          else if (!x[31] && x[30:0] > 31'h42B1_7217) begin y <= gdn_pkg::FP32_INF; done <= 1'b1; end
          else if (x[31] && x[30:0] > 31'h42AE_AC4F) begin y <= 32'd0; done <= 1'b1; end
          else begin
            yv <= m_y; busy <= 1'b1; state <= E_SPLIT;
          end
        end
        E_SPLIT: begin
          n  <= 10'(nn);
          fv <= (fabs == 0) ? 32'd0 : {ffix[40], 8'd126 - 8'(lz), fsh[23:1]};
          pv <= coef(3'd7);
          k  <= 3'd6;
          state <= E_POLY;
        end
        E_POLY: begin
          pv <= a_y;
          if (k == 0) state <= E_SCALE;
          else        k <= k - 3'd1;
        end
        E_SCALE: begin
          if (e_new >= 255)    y <= gdn_pkg::FP32_INF;
          else if (e_new <= 0) y <= 32'd0;
          else                 y <= {1'b0, e_new[7:0], pv[22:0]};
          done <= 1'b1; busy <= 1'b0; state <= E_IDLE;
        end
        default: state <= E_IDLE;
      endcase
    end
  end
endmodule
