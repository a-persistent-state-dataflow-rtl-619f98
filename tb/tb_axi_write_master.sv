// tb_axi_write_master: streams 700 elements (from 0x100 bytes below a 4 KB
// boundary) through the AXI write master into a behavioural AXI memory with
// random back-pressure, with random gaps on the input stream between beats,
// and checks the memory contents, the burst count, the 4 KB rule, wlast
// placement and that done comes only after every write response.
module tb_axi_write_master;
  localparam int LEN = 700;
  localparam longint BASE = 64'h0F00;
  logic clk = 0, rst_n = 0, start = 0, busy, done, in_valid = 0, in_ready, bresp_err;
  logic [15:0] in_data = 0;
  logic awvalid, awready, wvalid, wready, wlast, bvalid, bready;
  logic [63:0] awaddr; logic [7:0] awlen; logic [2:0] awsize; logic [1:0] awburst, bresp, wstrb;
  logic [15:0] wdata;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  axi_write_master #(.DATA_W(16), .ADDR_W(64), .MAX_BURST(256)) dut (
    .clk, .rst_n, .start, .base(BASE), .len(32'(LEN)), .busy, .done, .in_valid, .in_ready, .in_data,
    .m_axi_awvalid(awvalid), .m_axi_awready(awready), .m_axi_awaddr(awaddr), .m_axi_awlen(awlen),
    .m_axi_awsize(awsize), .m_axi_awburst(awburst), .m_axi_wvalid(wvalid), .m_axi_wready(wready),
    .m_axi_wdata(wdata), .m_axi_wstrb(wstrb), .m_axi_wlast(wlast), .m_axi_bvalid(bvalid),
    .m_axi_bready(bready), .m_axi_bresp(bresp), .bresp_err);
  axi_mem_model #(.DATA_W(16), .MEM_BYTES(8192), .STALL_PCT(25)) mem (.clk, .rst_n,
    .arvalid(1'b0), .arready(), .araddr(64'd0), .arlen(8'd0), .arsize(3'd0), .arburst(2'd0),
    .rvalid(), .rready(1'b0), .rdata(), .rresp(), .rlast(),
    .awvalid, .awready, .awaddr, .awlen, .awsize, .awburst, .wvalid, .wready, .wdata, .wstrb, .wlast,
    .bvalid, .bready, .bresp);
  int nb = 0;
  always @(posedge clk) if (bvalid && bready) nb++;
  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    int sent;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    sent = 0;
    while (!done) begin
      // a new element is offered only after the previous one was taken
      if (!in_valid && sent < LEN && $urandom_range(3, 0) != 0) begin in_valid = 1; in_data = 16'(sent * 13 + 5); end
      @(posedge clk);
      if (in_valid && in_ready) begin sent++; #1 in_valid = 0; end
      @(negedge clk);
    end
    for (int i = 0; i < LEN; i++) begin
      checks++;
      if ({mem.mem[int'(BASE) + 2 * i + 1], mem.mem[int'(BASE) + 2 * i]} !== 16'(i * 13 + 5)) begin
        failures++; if (failures < 10) $display("word %0d wrong", i);
      end
    end
    checks++; if (mem.wr_bursts < 4 || nb != mem.wr_bursts) begin failures++; $display("bursts %0d responses %0d", mem.wr_bursts, nb); end
    checks++; if (mem.boundary_errs != 0) begin failures++; $display("burst rule broken"); end
    checks++; if (sent != LEN) begin failures++; $display("sent %0d", sent); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
