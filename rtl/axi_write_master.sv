// axi_write_master: AXI4 write master that writes a stream of len elements to a
// contiguous array starting at byte address base; used by the store stage on
// the output port (gmem3).
//
// One element per beat (DATA_W bits, all strobes set), INCR bursts of up to
// MAX_BURST beats that never cross a 4 KB boundary. For each burst it sends the
// address, then passes the element stream through to the W channel (in_ready =
// wready while in the data phase, wlast on the burst's last beat), then waits
// for the write response before the next burst.
// Interface: pulse start with base/len; stream in_valid/in_ready/in_data; done
// pulses after the last write response. bresp_err records a non-OKAY response.
// AXI rules checked by assertions: aw* and w* stable while valid waits for ready.
// Burst writes are the paper's ("AXI burst" in its store stage); sizes and the
// response handling are this design's.
module axi_write_master #(
  parameter int unsigned DATA_W    = 16,
  parameter int unsigned ADDR_W    = 64,
  parameter int unsigned MAX_BURST = 256
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ADDR_W-1:0] base,
  input  logic [31:0]       len,
  output logic              busy,
  output logic              done,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [DATA_W-1:0] in_data,
  output logic              m_axi_awvalid,
  input  logic              m_axi_awready,
  output logic [ADDR_W-1:0] m_axi_awaddr,
  output logic [7:0]        m_axi_awlen,
  output logic [2:0]        m_axi_awsize,
  output logic [1:0]        m_axi_awburst,
  output logic              m_axi_wvalid,
  input  logic              m_axi_wready,
  output logic [DATA_W-1:0] m_axi_wdata,
  output logic [DATA_W/8-1:0] m_axi_wstrb,
  output logic              m_axi_wlast,
  input  logic              m_axi_bvalid,
  output logic              m_axi_bready,
  input  logic [1:0]        m_axi_bresp,
  output logic              bresp_err
);
  localparam int unsigned BYTES = DATA_W / 8;
  typedef enum logic [2:0] {W_IDLE, W_NEXT, W_ADDR, W_DATA, W_RESP} state_e;
  state_e state;
  logic [ADDR_W-1:0] base_r, addr;
  logic [31:0]       len_r, sent, remain, to_4k, blen;
  logic [7:0]        beat;

  always_comb begin
    addr   = base_r + ADDR_W'(sent) * ADDR_W'(BYTES);
    remain = len_r - sent;
    to_4k  = (32'd4096 - 32'(addr[11:0])) / BYTES;
    blen   = remain;
    if (blen > MAX_BURST) blen = MAX_BURST;
    if (blen > to_4k)     blen = to_4k;
  end

  assign m_axi_awsize  = 3'($clog2(BYTES));
  assign m_axi_awburst = 2'b01;
  assign m_axi_wstrb   = '1;
  assign m_axi_wvalid  = (state == W_DATA) && in_valid;
  assign m_axi_wdata   = in_data;
  assign m_axi_wlast   = (beat == m_axi_awlen);
  assign in_ready      = (state == W_DATA) && m_axi_wready;
  assign m_axi_bready  = (state == W_RESP);
  assign busy          = (state != W_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= W_IDLE; base_r <= '0; len_r <= '0; sent <= '0; beat <= '0; done <= 1'b0;
      m_axi_awvalid <= 1'b0; m_axi_awaddr <= '0; m_axi_awlen <= '0; bresp_err <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        W_IDLE: if (start) begin
          base_r <= base; len_r <= len; sent <= '0; bresp_err <= 1'b0; state <= W_NEXT;
        end
        W_NEXT: begin
          if (remain == 0) begin
            state <= W_IDLE; done <= 1'b1;
          end else begin
            m_axi_awvalid <= 1'b1;
            m_axi_awaddr  <= addr;
            m_axi_awlen   <= 8'(blen - 1);
            sent          <= sent + blen;
            beat          <= '0;
            state         <= W_ADDR;
          end
        end
        W_ADDR: if (m_axi_awready) begin
          m_axi_awvalid <= 1'b0;
          state         <= W_DATA;
        end
        W_DATA: if (m_axi_wvalid && m_axi_wready) begin
          beat <= beat + 8'd1;
          if (m_axi_wlast) state <= W_RESP;
        end
        W_RESP: if (m_axi_bvalid) begin
          if (m_axi_bresp != 2'b00) bresp_err <= 1'b1;
          state <= W_NEXT;
        end
        default: state <= W_IDLE;
      endcase
    end
  end

  a_aw_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (m_axi_awvalid && !m_axi_awready) |=> (m_axi_awvalid && $stable(m_axi_awaddr)));
  a_w_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (m_axi_wvalid && !m_axi_wready) |=> m_axi_wvalid);
endmodule
