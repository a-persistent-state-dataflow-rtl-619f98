// gdn_store: the store stage of the dataflow loop. For each iteration it takes
// the H_ITER x D FP32 outputs from the out channel, rounds them to FP16 and
// writes them through its AXI4 write master to the output array, head-major:
// output element (h, i) of value head h goes to out_base + 2*(h*D + i).
// Iteration n covers heads n*H_ITER ... so its block starts at element
// n*H_ITER*D. One element per cycle while the bus accepts it, so an iteration
// of 8 x 128 outputs takes ~1,030 cycles, well under the compute interval.
// Control: tok_start resets the iteration counter; all_done is high once N_ITER
// iterations have been written and acknowledged.
// FP16 outputs and burst writes follow the paper's system diagram; the output
// layout is this design's.
module gdn_store #(
  parameter int unsigned HV        = 32,
  parameter int unsigned D         = 128,
  parameter int unsigned H_ITER    = 8,
  parameter int unsigned ADDR_W    = 64,
  parameter int unsigned MAX_BURST = 256,
  localparam int unsigned N_ITER   = HV / H_ITER,
  localparam int unsigned NE       = H_ITER * D
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   tok_start,
  input  logic [ADDR_W-1:0]      out_base,
  input  logic                   rd_valid,
  input  logic [NE-1:0][31:0]    rd_data,
  output logic                   rd_release,
  output logic                   all_done,
  output logic                   busy,
  output logic                   bresp_err,
  output logic                   m_axi_awvalid,
  input  logic                   m_axi_awready,
  output logic [ADDR_W-1:0]      m_axi_awaddr,
  output logic [7:0]             m_axi_awlen,
  output logic [2:0]             m_axi_awsize,
  output logic [1:0]             m_axi_awburst,
  output logic                   m_axi_wvalid,
  input  logic                   m_axi_wready,
  output logic [15:0]            m_axi_wdata,
  output logic [1:0]             m_axi_wstrb,
  output logic                   m_axi_wlast,
  input  logic                   m_axi_bvalid,
  output logic                   m_axi_bready,
  input  logic [1:0]             m_axi_bresp
);
  typedef enum logic [1:0] {S_IDLE, S_START, S_RUN} state_e;
  state_e state;
  logic [$clog2(N_ITER+1)-1:0] n_it;
  logic [$clog2(NE+1)-1:0]     e;
  logic        wm_start, wm_busy, wm_done, s_valid, s_ready;
  logic [15:0] s_data;
  logic [31:0] cur;

  assign cur      = rd_data[e[$clog2(NE)-1:0]];
  assign s_valid  = (state == S_RUN) && (e != ($clog2(NE+1))'(NE));
  assign wm_start = (state == S_START);
  assign all_done = (state == S_IDLE) && (n_it == ($clog2(N_ITER+1))'(N_ITER));
  assign busy     = (state != S_IDLE);

  fp32_to_fp16 u_cvt (.f(cur), .h(s_data));

  axi_write_master #(.DATA_W(16), .ADDR_W(ADDR_W), .MAX_BURST(MAX_BURST)) u_wm (
    .clk, .rst_n, .start(wm_start),
    .base(out_base + ADDR_W'(int'(n_it) * NE * 2)), .len(32'(NE)),
    .busy(wm_busy), .done(wm_done),
    .in_valid(s_valid), .in_ready(s_ready), .in_data(s_data),
    .m_axi_awvalid, .m_axi_awready, .m_axi_awaddr, .m_axi_awlen, .m_axi_awsize, .m_axi_awburst,
    .m_axi_wvalid, .m_axi_wready, .m_axi_wdata, .m_axi_wstrb, .m_axi_wlast,
    .m_axi_bvalid, .m_axi_bready, .m_axi_bresp, .bresp_err);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; n_it <= '0; e <= '0; rd_release <= 1'b0;
    end else begin
      rd_release <= 1'b0;
      case (state)
        S_IDLE: begin
          if (tok_start) n_it <= '0;
          else if (rd_valid && !rd_release && n_it != ($clog2(N_ITER+1))'(N_ITER)) begin
            state <= S_START; e <= '0;
          end
        end
        S_START: state <= S_RUN;
        S_RUN: begin
          if (s_valid && s_ready) e <= e + 1'b1;
          if (wm_done) begin
            rd_release <= 1'b1;
            n_it       <= n_it + 1'b1;
            state      <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
