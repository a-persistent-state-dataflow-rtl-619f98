// fp32_ln: sequential binary32 natural logarithm, used by the gate unit for
// softplus(x) = ln(1 + e^x).
//
// Method: z = 2^e * m with m folded into [sqrt(1/2), sqrt(2)); then
// ln z = e*ln2 + 2*atanh(s), s = (m-1)/(m+1), |s| <= 0.172, with the odd series
// 2s(1 + s^2/3 + s^4/5 + s^6/7 + s^8/9) in Horner form. Each step is one pass
// through a multiply then an add; the quotient uses an fp32_div.
// Special values: z < 0 or NaN gives NaN, z = 0 (or subnormal) gives -inf,
// +inf gives +inf.
// Interface: pulse start with z; done pulses with y valid about 40 cycles later.
// Not described in the paper (which names only softplus); this design's own.
module fp32_ln (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [31:0] z,
  output logic        busy,
  output logic        done,
  output logic [31:0] y
);
  typedef enum logic [3:0] {L_IDLE, L_MM, L_MP, L_DIV, L_WAIT, L_S2, L_POLY, L_RS, L_R2, L_EL, L_SUM} state_e;
  state_e state;
  logic [31:0] mv, a_r, b_r, sv, s2, pv, rv, ef;
  logic signed [8:0] ev;
  logic [1:0]  k;
  logic [31:0] m_a, m_b, m_y, a_b, a_y;
  logic        d_start, d_busy, d_done;
  logic [31:0] d_q;

  fp32_mul u_mul (.a(m_a), .b(m_b), .y(m_y));
  fp32_add u_add (.a(m_y), .b(a_b), .y(a_y));
  fp32_div u_div (.clk, .rst_n, .start(d_start), .a(a_r), .b(b_r), .busy(d_busy), .done(d_done), .q(d_q));

  function automatic logic [31:0] coef(input logic [1:0] i);
    case (i)
      2'd0: return 32'h3F80_0000;  // 1
      2'd1: return 32'h3EAA_AAAB;  // 1/3
      2'd2: return 32'h3E4C_CCCD;  // 1/5
      default: return 32'h3E12_4925;  // 1/7
    endcase
  endfunction

  // integer exponent to binary32 (|ev| <= 128)
  logic [7:0] eabs;
  logic [2:0] p;
  logic [22:0] efr;
  always_comb begin
    eabs = ev[8] ? 8'(-ev) : 8'(ev);
    p = 3'd0;
    for (int i = 0; i < 8; i++) if (eabs[i]) p = 3'(i);
    efr = 23'({15'd0, eabs} << (5'd23 - 5'(p)));
    ef  = (eabs == 0) ? 32'd0 : {ev[8], 8'(8'd127 + 8'(p)), efr};
  end

  always_comb begin
    m_a = 32'd0; m_b = 32'd0; a_b = 32'd0;
    case (state)
      L_MM:   begin m_a = mv; m_b = gdn_pkg::FP32_ONE; a_b = 32'hBF80_0000; end  // m - 1
      L_MP:   begin m_a = mv; m_b = gdn_pkg::FP32_ONE; a_b = gdn_pkg::FP32_ONE; end  // m + 1
      L_S2:   begin m_a = sv; m_b = sv; end
      L_POLY: begin m_a = pv; m_b = s2; a_b = coef(k); end
      L_RS:   begin m_a = pv; m_b = sv; end
      L_R2:   begin m_a = rv; m_b = 32'h4000_0000; end                          // * 2
      L_EL:   begin m_a = ef; m_b = gdn_pkg::FP32_LN2; a_b = rv; end          // e ln2 + r
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= L_IDLE; busy <= 1'b0; done <= 1'b0; y <= '0; d_start <= 1'b0;
      mv <= '0; a_r <= '0; b_r <= '0; sv <= '0; s2 <= '0; pv <= '0; rv <= '0; ev <= '0; k <= '0;
    end else begin
      done <= 1'b0;
      d_start <= 1'b0;
      case (state)
        L_IDLE: if (start) begin
          if ((z[30:23] == 8'hFF && z[22:0] != 0) || (z[31] && z[30:23] != 8'h00)) begin
            y <= gdn_pkg::FP32_QNAN; done <= 1'b1;
          end else if (z[30:23] == 8'h00) begin
            y <= 32'hFF80_0000; done <= 1'b1;
          end else if (z[30:23] == 8'hFF) begin
            y <= gdn_pkg::FP32_INF; done <= 1'b1;
          end else begin
            if (z[22:0] > 23'h3504F3) begin
              mv <= {1'b0, 8'd126, z[22:0]};
              ev <= 9'(signed'({1'b0, z[30:23]})) - 9'sd126;
            end else begin
              mv <= {1'b0, 8'd127, z[22:0]};
              ev <= 9'(signed'({1'b0, z[30:23]})) - 9'sd127;
            end
            busy <= 1'b1; state <= L_MM;
          end
        end
        L_MM:   begin a_r <= a_y; state <= L_MP; end
        L_MP:   begin b_r <= a_y; state <= L_DIV; end
        L_DIV:  begin d_start <= 1'b1; state <= L_WAIT; end
        L_WAIT: if (d_done) begin sv <= d_q; state <= L_S2; end
        L_S2:   begin s2 <= m_y; pv <= 32'h3DE3_8E39; k <= 2'd3; state <= L_POLY; end  // 1/9
        L_POLY: begin
          pv <= a_y;
          if (k == 0) state <= L_RS;
          else        k <= k - 2'd1;
        end
        L_RS:   begin rv <= m_y; state <= L_R2; end
        L_R2:   begin rv <= m_y; state <= L_EL; end
        L_EL:   begin y <= a_y; done <= 1'b1; busy <= 1'b0; state <= L_IDLE; end
        default: state <= L_IDLE;
      endcase
    end
  end
endmodule
