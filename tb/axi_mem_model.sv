// axi_mem_model: behavioural AXI4 slave memory for the testbenches (stands in for
// the off-chip HBM and host buffers the accelerator reads and writes). Byte
// array of MEM_BYTES, INCR bursts, one beat of DATA_W bits per transfer.
// It inserts random back-pressure (STALL_PCT percent of cycles: arready,
// awready, wready low or a read beat held back) and counts the stalled cycles
// and the bursts, so testbenches can show that the masters handle both.
// Not synthesizable; testbench use only.
module axi_mem_model #(
  parameter int unsigned DATA_W    = 16,
  parameter int unsigned ADDR_W    = 64,
  parameter int unsigned MEM_BYTES = 65536,
  parameter int unsigned STALL_PCT = 10
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              arvalid,
  output logic              arready,
  input  logic [ADDR_W-1:0] araddr,
  input  logic [7:0]        arlen,
  input  logic [2:0]        arsize,
  input  logic [1:0]        arburst,
  output logic              rvalid,
  input  logic              rready,
  output logic [DATA_W-1:0] rdata,
  output logic [1:0]        rresp,
  output logic              rlast,
  input  logic              awvalid,
  output logic              awready,
  input  logic [ADDR_W-1:0] awaddr,
  input  logic [7:0]        awlen,
  input  logic [2:0]        awsize,
  input  logic [1:0]        awburst,
  input  logic              wvalid,
  output logic              wready,
  input  logic [DATA_W-1:0] wdata,
  input  logic [DATA_W/8-1:0] wstrb,
  input  logic              wlast,
  output logic              bvalid,
  input  logic              bready,
  output logic [1:0]        bresp
);
  localparam int unsigned BYTES = DATA_W / 8;
  logic [7:0] mem [MEM_BYTES];
  bit          stall_pct_override = 0;   // set by a testbench: no stalls, minimum latency
  int unsigned rd_bursts = 0, wr_bursts = 0, stalls = 0, short_bursts = 0, boundary_errs = 0;

  logic        r_act, w_act;
  logic [ADDR_W-1:0] r_addr, w_addr;
  logic [8:0]  r_left, w_left;
  int          r_wait;

  function automatic bit stall();
    if (stall_pct_override) return 1'b0;
    return ($urandom_range(99, 0) < STALL_PCT);
  endfunction

  initial begin
    for (int i = 0; i < MEM_BYTES; i++) mem[i] = 8'h00;
  end

  always_comb begin
    rdata = '0;
    for (int b = 0; b < BYTES; b++) rdata[8*b +: 8] = mem[(int'(r_addr) + b) % MEM_BYTES];
  end
  assign rresp = 2'b00;
  assign bresp = 2'b00;
  assign rlast = rvalid && (r_left == 9'd1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      arready <= 1'b0; rvalid <= 1'b0; r_act <= 1'b0; r_left <= '0; r_addr <= '0; r_wait <= 0;
      awready <= 1'b0; wready <= 1'b0; w_act <= 1'b0; w_left <= '0; w_addr <= '0; bvalid <= 1'b0;
    end else begin
      // ---- read ----
      arready <= !r_act && !stall();
      if (arvalid && arready && !r_act) begin
        r_act  <= 1'b1; r_addr <= araddr; r_left <= 9'(arlen) + 9'd1; r_wait <= stall_pct_override ? 0 : int'($urandom_range(3, 1));
        arready <= 1'b0;
        rd_bursts++;
        if (arlen != 8'd255) short_bursts++;
        if ((int'(araddr) % 4096) + (int'(arlen) + 1) * BYTES > 4096) boundary_errs++;
      end
      if (r_act) begin
        if (rvalid && rready) begin
          r_addr <= r_addr + ADDR_W'(BYTES);
          r_left <= r_left - 9'd1;
          if (r_left == 9'd1) begin r_act <= 1'b0; rvalid <= 1'b0; end
          else rvalid <= !stall();
        end else if (r_wait > 0) r_wait <= r_wait - 1;
        else rvalid <= rvalid | !stall();
      end
      if (r_act && rready && !rvalid && r_wait == 0) stalls++;
      // ---- write ----
      awready <= !w_act && !bvalid && !stall();
      if (awvalid && awready && !w_act) begin
        w_act <= 1'b1; w_addr <= awaddr; w_left <= 9'(awlen) + 9'd1; awready <= 1'b0;
        wr_bursts++;
        if ((int'(awaddr) % 4096) + (int'(awlen) + 1) * BYTES > 4096) boundary_errs++;
      end
      wready <= w_act && !stall();
      if (w_act && wvalid && !wready) stalls++;
      if (w_act && wvalid && wready) begin
        for (int b = 0; b < BYTES; b++) if (wstrb[b]) mem[(int'(w_addr) + b) % MEM_BYTES] <= wdata[8*b +: 8];
        w_addr <= w_addr + ADDR_W'(BYTES);
        w_left <= w_left - 9'd1;
        if (w_left == 9'd1) begin
          w_act <= 1'b0; wready <= 1'b0; bvalid <= 1'b1;
          if (!wlast) boundary_errs++;
        end
      end
      if (bvalid && bready) bvalid <= 1'b0;
    end
  end
endmodule
