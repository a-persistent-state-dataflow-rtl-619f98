// gdn_gate_unit: computes the two scalar gates of one value head,
//   g    = exp( -sigmoid(alpha) * exp(A_log) * softplus(dt_bias) )
//   beta = sigmoid(b)
// with sigmoid(x) = 1/(1+exp(-x)) and softplus(x) = ln(1+exp(x)) (x itself for
// x > 16, where the two agree in binary32).
//
// A small sequencer runs the steps one after another over one fp32_exp, one
// fp32_ln, one fp32_div and one multiply-add pair:
//   exp(-alpha), +1, 1/., exp(A_log), exp(dt), +1, ln, *, *, exp(-.), exp(-b), +1, 1/.
// Interface: pulse start with the four FP32 inputs held stable until done;
// done pulses with g and beta valid, about 150 cycles later.
// The gate formula is the paper's (its gate equation, and the operator chain
// sigma, x, exp, x, softplus, exp of its prepare stage); the way each operator
// is computed, and running them on one shared unit, are this design's choices.
module gdn_gate_unit (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [31:0] alpha,
  input  logic [31:0] b,
  input  logic [31:0] a_log,
  input  logic [31:0] dt,
  output logic        busy,
  output logic        done,
  output logic [31:0] g,
  output logic [31:0] beta
);
  typedef enum logic [4:0] {
    G_IDLE, G_EXP_A, G_W_EXP_A, G_ADD_A, G_DIV_A, G_W_DIV_A,
    G_EXP_L, G_W_EXP_L, G_SP, G_W_EXP_T, G_ADD_T, G_LN, G_W_LN,
    G_MUL1, G_MUL2, G_EXP_G, G_W_EXP_G,
    G_EXP_B, G_W_EXP_B, G_ADD_B, G_DIV_B, G_W_DIV_B
  } state_e;
  state_e state;

  logic [31:0] sig_a, e_alog, sp, tmp;
  logic        x_start, x_busy, x_done, l_start, l_busy, l_done, d_start, d_busy, d_done;
  logic [31:0] x_in, x_out, l_out, d_out;
  logic [31:0] m_a, m_b, m_y, a_b, a_y;

  fp32_exp u_exp (.clk, .rst_n, .start(x_start), .x(x_in), .busy(x_busy), .done(x_done), .y(x_out));
  fp32_ln  u_ln  (.clk, .rst_n, .start(l_start), .z(tmp), .busy(l_busy), .done(l_done), .y(l_out));
  fp32_div u_div (.clk, .rst_n, .start(d_start), .a(gdn_pkg::FP32_ONE), .b(tmp), .busy(d_busy), .done(d_done), .q(d_out));
  fp32_mul u_mul (.a(m_a), .b(m_b), .y(m_y));
  fp32_add u_add (.a(m_y), .b(a_b), .y(a_y));

  always_comb begin
    x_start = 1'b0; l_start = 1'b0; d_start = 1'b0;
    x_in = tmp;
    m_a = tmp; m_b = gdn_pkg::FP32_ONE; a_b = 32'd0;
    case (state)
      G_EXP_A: begin x_start = 1'b1; x_in = {~alpha[31], alpha[30:0]}; end
      G_EXP_L: begin x_start = 1'b1; x_in = a_log; end
      G_SP:    begin x_start = !(!dt[31] && dt[30:0] > 31'h4180_0000); x_in = dt; end
      G_EXP_G: begin x_start = 1'b1; x_in = tmp; end
      G_LN:    l_start = 1'b1;
      G_EXP_B: begin x_start = 1'b1; x_in = {~b[31], b[30:0]}; end
      G_ADD_A, G_ADD_T, G_ADD_B: begin m_a = tmp; a_b = gdn_pkg::FP32_ONE; end
      G_DIV_A, G_DIV_B: d_start = 1'b1;
      G_MUL1:  begin m_a = sig_a; m_b = e_alog; end
      G_MUL2:  begin m_a = tmp; m_b = sp; end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= G_IDLE; busy <= 1'b0; done <= 1'b0; g <= '0; beta <= '0;
      sig_a <= '0; e_alog <= '0; sp <= '0; tmp <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        G_IDLE:    if (start) begin busy <= 1'b1; state <= G_EXP_A; end
        G_EXP_A:   state <= G_W_EXP_A;
        G_W_EXP_A: if (x_done) begin tmp <= x_out; state <= G_ADD_A; end
        G_ADD_A:   begin tmp <= a_y; state <= G_DIV_A; end
        G_DIV_A:   state <= G_W_DIV_A;
        G_W_DIV_A: if (d_done) begin sig_a <= d_out; state <= G_EXP_L; end
        G_EXP_L:   state <= G_W_EXP_L;
        G_W_EXP_L: if (x_done) begin e_alog <= x_out; state <= G_SP; end
        G_SP:      if (!dt[31] && dt[30:0] > 31'h4180_0000) begin sp <= dt; state <= G_MUL1; end
                   else state <= G_W_EXP_T;
        G_W_EXP_T: if (x_done) begin tmp <= x_out; state <= G_ADD_T; end
        G_ADD_T:   begin tmp <= a_y; state <= G_LN; end
        G_LN:      state <= G_W_LN;
        G_W_LN:    if (l_done) begin sp <= l_out; state <= G_MUL1; end
        G_MUL1:    begin tmp <= m_y; state <= G_MUL2; end
        G_MUL2:    begin tmp <= {~m_y[31], m_y[30:0]}; state <= G_EXP_G; end
        G_EXP_G:   state <= G_W_EXP_G;
        G_W_EXP_G: if (x_done) begin g <= x_out; state <= G_EXP_B; end
        G_EXP_B:   state <= G_W_EXP_B;
        G_W_EXP_B: if (x_done) begin tmp <= x_out; state <= G_ADD_B; end
        G_ADD_B:   begin tmp <= a_y; state <= G_DIV_B; end
        G_DIV_B:   state <= G_W_DIV_B;
        G_W_DIV_B: if (d_done) begin beta <= d_out; done <= 1'b1; busy <= 1'b0; state <= G_IDLE; end
        default:   state <= G_IDLE;
      endcase
    end
  end
endmodule
