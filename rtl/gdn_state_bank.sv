// gdn_state_bank: one bank of the persistent recurrent state, a simple dual-port
// RAM (one read port, one write port) that maps onto FPGA block RAM.
//
// Each bank holds, for one head position and one of the PK cyclic column banks,
// the words of every iteration slice. The read port has one cycle of latency
// (rd_data is registered on rd_en); the write port writes on the clock edge.
// Reading an address in the cycle it is written returns the old word. The
// contents start at zero, as the static arrays of the HLS original do on
// configuration; they are never reset afterwards, so the state persists from one
// decode step (token) to the next.
// Dual-port banks are the paper's; port roles and read-first behaviour are this
// design's.
module gdn_state_bank #(
  parameter int unsigned DEPTH = 4096,
  parameter int unsigned W     = 32
) (
  input  logic                     clk,
  input  logic                     rd_en,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output logic [W-1:0]             rd_data,
  input  logic                     wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  logic [W-1:0]             wr_data
);
  logic [W-1:0] mem [DEPTH];

  initial begin
    for (int i = 0; i < DEPTH; i++) mem[i] = '0;
  end

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_addr];
    if (wr_en) mem[wr_addr] <= wr_data;
  end
endmodule
