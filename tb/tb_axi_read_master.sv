// tb_axi_read_master: reads three arrays (one of 600 elements starting 0x100
// bytes below a 4 KB boundary, one of 1 element, one of 300) from a behavioural
// AXI memory with random back-pressure, and checks that every element arrives
// once, in order, tagged with the right job and index, that bursts stay within
// 256 beats and 4 KB, that more than one burst and a 4 KB split happen, and
// that the element rate is near one per cycle when the memory never stalls
// (second pass).
module tb_axi_read_master;
  localparam int NJ = 3;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic [NJ-1:0][63:0] job_base;
  logic [NJ-1:0][31:0] job_len;
  logic arvalid, arready, rvalid, rready, rlast, out_valid, rresp_err;
  logic [63:0] araddr; logic [7:0] arlen; logic [2:0] arsize; logic [1:0] arburst, rresp, out_job;
  logic [15:0] rdata, out_data;
  logic [31:0] out_idx;
  int checks = 0, failures = 0, exp_job = 0, exp_idx = 0;
  longint cyc = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  axi_read_master #(.NJOBS(NJ), .DATA_W(16), .ADDR_W(64), .MAX_BURST(256)) dut (
    .clk, .rst_n, .start, .job_base, .job_len, .busy, .done,
    .m_axi_arvalid(arvalid), .m_axi_arready(arready), .m_axi_araddr(araddr), .m_axi_arlen(arlen),
    .m_axi_arsize(arsize), .m_axi_arburst(arburst), .m_axi_rvalid(rvalid), .m_axi_rready(rready),
    .m_axi_rdata(rdata), .m_axi_rresp(rresp), .m_axi_rlast(rlast),
    .out_valid, .out_job, .out_idx, .out_data, .rresp_err);
  axi_mem_model #(.DATA_W(16), .MEM_BYTES(16384), .STALL_PCT(20)) mem (.clk, .rst_n,
    .arvalid, .arready, .araddr, .arlen, .arsize, .arburst, .rvalid, .rready, .rdata, .rresp, .rlast,
    .awvalid(1'b0), .awready(), .awaddr(64'd0), .awlen(8'd0), .awsize(3'd0), .awburst(2'd0),
    .wvalid(1'b0), .wready(), .wdata(16'd0), .wstrb(2'd0), .wlast(1'b0), .bvalid(), .bready(1'b0), .bresp());

  function automatic logic [15:0] pat(input int j, input int i); return 16'(j * 4099 + i * 7 + 1); endfunction

  always @(posedge clk) if (out_valid) begin
    checks++;
    while (exp_job < NJ && exp_idx >= int'(job_len[exp_job])) begin exp_job++; exp_idx = 0; end
    if (int'(out_job) != exp_job || int'(out_idx) != exp_idx || out_data !== pat(exp_job, exp_idx)) begin
      failures++;
      if (failures < 10) $display("got job %0d idx %0d data %h, expected job %0d idx %0d data %h",
                                  out_job, out_idx, out_data, exp_job, exp_idx, pat(exp_job, exp_idx));
    end
    exp_idx++;
  end

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint t0;
    job_base[0] = 64'h0F00; job_len[0] = 600;
    job_base[1] = 64'h2000; job_len[1] = 1;
    job_base[2] = 64'h2100; job_len[2] = 300;
    for (int j = 0; j < NJ; j++)
      for (int i = 0; i < int'(job_len[j]); i++) begin
        mem.mem[int'(job_base[j]) + 2 * i]     = pat(j, i)[7:0];
        mem.mem[int'(job_base[j]) + 2 * i + 1] = pat(j, i)[15:8];
      end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int pass = 0; pass < 2; pass++) begin
      if (pass == 1) mem.stall_pct_override = 1;
      exp_job = 0; exp_idx = 0;
      @(negedge clk) start = 1;
      t0 = cyc;
      @(negedge clk) start = 0;
      while (!done) @(negedge clk);
      checks++;
      if (exp_job != NJ - 1 || exp_idx != int'(job_len[NJ - 1])) begin failures++; $display("pass %0d incomplete", pass); end
      if (pass == 1) begin
        $display("901 elements without stalls: %0d cycles", cyc - t0);
        checks++;
        if (cyc - t0 > 901 + 8 * 8) begin failures++; $display("too slow"); end
      end
    end
    checks++; if (mem.rd_bursts < 8)      begin failures++; $display("bursts %0d", mem.rd_bursts); end
    checks++; if (mem.boundary_errs != 0) begin failures++; $display("4 KB crossed"); end
    checks++; if (mem.stalls == 0)        begin failures++; $display("no stall"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
