// axi_read_master: AXI4 read master that fetches NJOBS contiguous arrays, one
// after another, and streams every element out tagged with its array (job) and
// element index. One instance serves each of the accelerator's input ports
// (gmem0: q, k, v; gmem1: alpha, b; gmem2: A_log, dt).
//
// Each beat carries one element (DATA_W bits, arsize = log2(DATA_W/8)). An
// array is read in INCR bursts of up to MAX_BURST beats that never cross a 4 KB
// boundary; one burst is outstanding at a time and rready is always high, so
// after the address handshake the port takes one element per cycle whenever the
// memory supplies it. Array bases must be aligned to DATA_W/8 bytes.
// Interface: pulse start with job_base/job_len stable; out_valid marks an
// element; done pulses when the last element has arrived.
// AXI rules checked by assertions: ar* stable while arvalid waits for arready.
// The paper uses AXI master ports and bursts; bus width, burst length and the
// single outstanding burst are this design's.
module axi_read_master #(
  parameter int unsigned NJOBS     = 3,
  parameter int unsigned DATA_W    = 16,
  parameter int unsigned ADDR_W    = 64,
  parameter int unsigned MAX_BURST = 256
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  input  logic [NJOBS-1:0][ADDR_W-1:0] job_base,
  input  logic [NJOBS-1:0][31:0]       job_len,
  output logic                         busy,
  output logic                         done,
  // AXI4 read address channel
  output logic                         m_axi_arvalid,
  input  logic                         m_axi_arready,
  output logic [ADDR_W-1:0]            m_axi_araddr,
  output logic [7:0]                   m_axi_arlen,
  output logic [2:0]                   m_axi_arsize,
  output logic [1:0]                   m_axi_arburst,
  // AXI4 read data channel
  input  logic                         m_axi_rvalid,
  output logic                         m_axi_rready,
  input  logic [DATA_W-1:0]            m_axi_rdata,
  input  logic [1:0]                   m_axi_rresp,
  input  logic                         m_axi_rlast,
  // element stream
  output logic                         out_valid,
  output logic [$clog2(NJOBS+1)-1:0]   out_job,
  output logic [31:0]                  out_idx,
  output logic [DATA_W-1:0]            out_data,
  output logic                         rresp_err
);
  localparam int unsigned BYTES = DATA_W / 8;
  localparam int unsigned JW    = $clog2(NJOBS + 1);
  typedef enum logic [1:0] {R_IDLE, R_NEXT, R_ADDR, R_DATA} state_e;
  state_e state;
  logic [JW-1:0]     job;
  logic [31:0]       issued, rcv;     // elements of the current job requested / received
  logic [ADDR_W-1:0] addr;
  logic [31:0]       remain, to_4k, blen;

  always_comb begin
    addr   = job_base[job[JW-1:0] < JW'(NJOBS) ? job : '0] + ADDR_W'(issued) * ADDR_W'(BYTES);
    remain = job_len[job < JW'(NJOBS) ? job : '0] - issued;
    to_4k  = (32'd4096 - 32'(addr[11:0])) / BYTES;
    blen   = remain;
    if (blen > MAX_BURST) blen = MAX_BURST;
    if (blen > to_4k)     blen = to_4k;
  end

  assign m_axi_arsize  = 3'($clog2(BYTES));
  assign m_axi_arburst = 2'b01;
  assign m_axi_rready  = (state == R_DATA);
  assign busy          = (state != R_IDLE);
  assign out_valid     = m_axi_rvalid && m_axi_rready;
  assign out_job       = job;
  assign out_idx       = rcv;
  assign out_data      = m_axi_rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= R_IDLE; job <= '0; issued <= '0; rcv <= '0; done <= 1'b0;
      m_axi_arvalid <= 1'b0; m_axi_araddr <= '0; m_axi_arlen <= '0; rresp_err <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        R_IDLE: if (start) begin
          job <= '0; issued <= '0; rcv <= '0; rresp_err <= 1'b0; state <= R_NEXT;
        end
        R_NEXT: begin
          if (job == JW'(NJOBS)) begin
            state <= R_IDLE; done <= 1'b1;
          end else if (remain == 0) begin
            job <= job + JW'(1); issued <= '0; rcv <= '0;
          end else begin
            m_axi_arvalid <= 1'b1;
            m_axi_araddr  <= addr;
            m_axi_arlen   <= 8'(blen - 1);
            issued        <= issued + blen;
            state         <= R_ADDR;
          end
        end
        R_ADDR: if (m_axi_arready) begin
          m_axi_arvalid <= 1'b0;
          state         <= R_DATA;
        end
        R_DATA: if (m_axi_rvalid) begin
          rcv <= rcv + 32'd1;
          if (m_axi_rresp != 2'b00) rresp_err <= 1'b1;
          if (m_axi_rlast) state <= R_NEXT;
        end
        default: state <= R_IDLE;
      endcase
    end
  end

  a_ar_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (m_axi_arvalid && !m_axi_arready) |=> (m_axi_arvalid && $stable(m_axi_araddr) && $stable(m_axi_arlen)));
endmodule
