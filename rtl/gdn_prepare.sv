// gdn_prepare: the prepare stage of the dataflow loop. For iteration n it copies
// the slices the compute stage needs from the input buffers into the q, k, v
// channels and computes the gates g and beta of the iteration's heads into the
// g and beta channels, then commits all five channels together.
//
//   q, k: the H_ITER/2 q/k heads n*H_ITER/2 ... of the iteration's GVA pairs
//   v:    the H_ITER value heads n*H_ITER ...
//   g, beta: one gdn_gate_unit, heads in turn (~165 cycles per head)
// Value head h uses q/k head h/2. The copy moves one element of q, k and v per
// cycle (H_ITER*D cycles); the gates run alongside it.
// Control: tok_start resets the iteration counter; while run is high the stage
// prepares iterations 0..N_ITER-1, each as soon as the channels have a free bank
// (ch_ready). Buffer reads are synchronous (one cycle).
// The stage's job is the paper's; copy order and one shared gate unit are this
// design's.
module gdn_prepare #(
  parameter int unsigned HQK    = 16,
  parameter int unsigned HV     = 32,
  parameter int unsigned D      = 128,
  parameter int unsigned H_ITER = 8,
  localparam int unsigned P     = H_ITER / 2,
  localparam int unsigned N_ITER = HV / H_ITER,
  localparam int unsigned QW    = $clog2(HQK * D),
  localparam int unsigned VW    = $clog2(HV * D),
  localparam int unsigned HW    = $clog2(HV),
  localparam int unsigned CW    = $clog2(H_ITER * D) + 1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        tok_start,
  input  logic                        run,
  // input buffer read ports
  output logic [QW-1:0]               q_addr,
  input  logic [31:0]                 q_data,
  output logic [QW-1:0]               k_addr,
  input  logic [31:0]                 k_data,
  output logic [VW-1:0]               v_addr,
  input  logic [31:0]                 v_data,
  output logic [HW-1:0]               h_addr,
  input  logic [31:0]                 alpha_data,
  input  logic [31:0]                 b_data,
  input  logic [31:0]                 a_log_data,
  input  logic [31:0]                 dt_data,
  // channel write ports (same word index for q and k, and for g and beta)
  input  logic                        ch_ready,
  output logic [P*D-1:0]              qk_wr_en,
  output logic [H_ITER*D-1:0]         v_wr_en,
  output logic [31:0]                 q_wr_data,
  output logic [31:0]                 k_wr_data,
  output logic [31:0]                 v_wr_data,
  output logic [H_ITER-1:0]           gb_wr_en,
  output logic [31:0]                 g_wr_data,
  output logic [31:0]                 beta_wr_data,
  output logic                        ch_commit,
  output logic                        busy,
  output logic                        all_done
);
  typedef enum logic [1:0] {P_IDLE, P_RUN, P_COMMIT} state_e;
  typedef enum logic [1:0] {GS_READ, GS_START, GS_WAIT, GS_DONE} gstate_e;
  state_e  state;
  gstate_e gs;
  logic [$clog2(N_ITER+1)-1:0] n_it;
  logic [CW-1:0] c;            // copy counter (issue side)
  logic          c_vld;        // data returning this cycle
  logic [CW-1:0] c_d;
  logic [$clog2(H_ITER+1)-1:0] gh;
  logic          copy_done;
  logic          g_start, g_busy, g_done;
  logic [31:0]   g_out, beta_out;

  assign copy_done = (c == CW'(H_ITER * D)) && !c_vld;
  assign q_addr = QW'(int'(n_it) * P * D + int'(c));
  assign k_addr = QW'(int'(n_it) * P * D + int'(c));
  assign v_addr = VW'(int'(n_it) * H_ITER * D + int'(c));
  assign h_addr = HW'(int'(n_it) * H_ITER + int'(gh));
  assign all_done = (state == P_IDLE) && (n_it == ($clog2(N_ITER+1))'(N_ITER));

  gdn_gate_unit u_gate (
    .clk, .rst_n, .start(g_start), .alpha(alpha_data), .b(b_data), .a_log(a_log_data), .dt(dt_data),
    .busy(g_busy), .done(g_done), .g(g_out), .beta(beta_out));

  always_comb begin
    qk_wr_en = '0;
    v_wr_en  = '0;
    if (c_vld) begin
      v_wr_en[c_d[$clog2(H_ITER*D)-1:0]] = 1'b1;
      if (int'(c_d) < P * D) qk_wr_en[c_d[$clog2(P*D)-1:0]] = 1'b1;
    end
    gb_wr_en = '0;
    if (g_done) gb_wr_en[gh[$clog2(H_ITER)-1:0]] = 1'b1;
  end
  assign q_wr_data    = q_data;
  assign k_wr_data    = k_data;
  assign v_wr_data    = v_data;
  assign g_wr_data    = g_out;
  assign beta_wr_data = beta_out;
  assign g_start      = (gs == GS_START);
  assign ch_commit    = (state == P_COMMIT);
  assign busy         = (state != P_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= P_IDLE; gs <= GS_READ; n_it <= '0; c <= '0; c_vld <= 1'b0; c_d <= '0; gh <= '0;
    end else begin
      c_vld <= 1'b0;
      case (state)
        P_IDLE: begin
          if (tok_start) n_it <= '0;
          else if (run && ch_ready && n_it != ($clog2(N_ITER+1))'(N_ITER)) begin
            state <= P_RUN; c <= '0; gh <= '0; gs <= GS_READ;
          end
        end
        P_RUN: begin
          if (c != CW'(H_ITER * D)) begin
            c_vld <= 1'b1; c_d <= c; c <= c + CW'(1);
          end
          case (gs)
            GS_READ:  gs <= GS_START;          // scalar buffer read latency
            GS_START: gs <= GS_WAIT;
            GS_WAIT:  if (g_done) begin
              if (gh == ($clog2(H_ITER+1))'(H_ITER - 1)) gs <= GS_DONE;
              else gs <= GS_READ;
              gh <= gh + 1'b1;
            end
            default: ;
          endcase
          if (copy_done && gs == GS_DONE) state <= P_COMMIT;
        end
        P_COMMIT: begin
          state <= P_IDLE;
          n_it  <= n_it + 1'b1;
        end
        default: state <= P_IDLE;
      endcase
    end
  end
endmodule
