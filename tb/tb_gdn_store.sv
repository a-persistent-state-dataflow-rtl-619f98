// tb_gdn_store: offers the store stage two tokens of N_ITER iterations of random
// FP32 outputs through the out-channel handshake, and checks that each
// iteration is released only after it was written, that every element lands in
// the AXI memory at out_base + 2*(h*D + i) as the nearest-even FP16 value, and
// that all_done rises after the last iteration of a token.
module tb_gdn_store;
  import tb_fp_pkg::*;
  localparam int HV = 8, D = 16, H_ITER = 4, N_ITER = HV / H_ITER, NE = H_ITER * D;
  localparam longint OB = 64'h0200;
  logic clk = 0, rst_n = 0, tok_start = 0, rd_valid = 0, rd_release, all_done, busy, bresp_err;
  logic [NE-1:0][31:0] rd_data;
  logic awvalid, awready, wvalid, wready, wlast, bvalid, bready;
  logic [63:0] awaddr; logic [7:0] awlen; logic [2:0] awsize; logic [1:0] awburst, bresp, wstrb;
  logic [15:0] wdata;
  logic [31:0] vals [HV*D];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  gdn_store #(.HV(HV), .D(D), .H_ITER(H_ITER), .ADDR_W(64), .MAX_BURST(16)) dut (
    .clk, .rst_n, .tok_start, .out_base(OB), .rd_valid, .rd_data, .rd_release, .all_done, .busy, .bresp_err,
    .m_axi_awvalid(awvalid), .m_axi_awready(awready), .m_axi_awaddr(awaddr), .m_axi_awlen(awlen),
    .m_axi_awsize(awsize), .m_axi_awburst(awburst), .m_axi_wvalid(wvalid), .m_axi_wready(wready),
    .m_axi_wdata(wdata), .m_axi_wstrb(wstrb), .m_axi_wlast(wlast), .m_axi_bvalid(bvalid),
    .m_axi_bready(bready), .m_axi_bresp(bresp));
  axi_mem_model #(.DATA_W(16), .MEM_BYTES(4096), .STALL_PCT(15)) mem (.clk, .rst_n,
    .arvalid(1'b0), .arready(), .araddr(64'd0), .arlen(8'd0), .arsize(3'd0), .arburst(2'd0),
    .rvalid(), .rready(1'b0), .rdata(), .rresp(), .rlast(),
    .awvalid, .awready, .awaddr, .awlen, .awsize, .awburst, .wvalid, .wready, .wdata, .wstrb, .wlast,
    .bvalid, .bready, .bresp);
  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int tok = 0; tok < 2; tok++) begin
      @(negedge clk) tok_start = 1;
      @(negedge clk) tok_start = 0;
      for (int n = 0; n < N_ITER; n++) begin
        int wb;
        for (int e = 0; e < NE; e++) begin
          vals[n * NE + e] = r2f((real'($urandom_range(20000, 0)) - 10000.0) / 3000.0);
          rd_data[e] = vals[n * NE + e];
        end
        checks++;
        if (all_done) begin failures++; $display("all_done early"); end
        rd_valid = 1;
        wb = mem.wr_bursts;
        while (!rd_release) @(negedge clk);
        checks++;
        if (mem.wr_bursts - wb != NE / 16 || mem.bvalid) begin failures++; $display("released before writes finished"); end
        rd_valid = 0;
        @(negedge clk);
      end
      repeat (2) @(negedge clk);
      checks++;
      if (!all_done) begin failures++; $display("all_done missing"); end
      for (int e = 0; e < HV * D; e++) begin
        logic [15:0] got;
        got = {mem.mem[int'(OB) + 2 * e + 1], mem.mem[int'(OB) + 2 * e]};
        checks++;
        if (got !== r2h(f2r(vals[e]))) begin
          failures++; if (failures < 10) $display("elem %0d got %h expected %h", e, got, r2h(f2r(vals[e])));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
