// gdn_pingpong: double-buffered channel between two dataflow stages (the q, k, v,
// g, beta and out channels of the prepare -> compute -> store pipeline).
//
// Two banks of N words. The producer writes any words of its current bank (one
// enable per word, so it may write one word or a whole tile per cycle) and then
// pulses wr_commit, which marks the bank full and moves the producer to the
// other bank. The consumer sees the oldest full bank on rd_data while rd_valid
// is high and pulses rd_release when done with it. So the producer can fill
// iteration n+1 while the consumer works on iteration n, which is how stages of
// successive iterations overlap.
// Timing: writes land on the clock edge; a commit is visible to the consumer
// (rd_valid) the next cycle; a release frees the bank for the producer the next
// cycle. Rules (asserted): commit only while wr_ready, release only while
// rd_valid, and no write while wr_ready is low.
// The two-bank structure is the usual HLS ping-pong buffer; the paper draws
// these channels as double boxes and states only that the stages overlap.
module gdn_pingpong #(
  parameter int unsigned N = 128,
  parameter int unsigned W = 32
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [N-1:0]        wr_en,
  input  logic [N-1:0][W-1:0] wr_data,
  input  logic                wr_commit,
  output logic                wr_ready,
  output logic                rd_valid,
  output logic [N-1:0][W-1:0] rd_data,
  input  logic                rd_release
);
  logic [1:0]          full;
  logic                wp, rp;
  logic [N-1:0][W-1:0] bank0, bank1;

  assign wr_ready = !full[wp];
  assign rd_valid = full[rp];
  assign rd_data  = rp ? bank1 : bank0;

  always_ff @(posedge clk) begin
    for (int i = 0; i < N; i++) begin
      if (wr_en[i] && !wp) bank0[i] <= wr_data[i];
      if (wr_en[i] &&  wp) bank1[i] <= wr_data[i];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full <= 2'b00; wp <= 1'b0; rp <= 1'b0;
    end else begin
      if (wr_commit && wr_ready) begin
        full[wp] <= 1'b1;
        wp       <= ~wp;
      end
      if (rd_release && rd_valid) begin
        full[rp] <= 1'b0;
        rp       <= ~rp;
      end
    end
  end

  a_commit:  assert property (@(posedge clk) disable iff (!rst_n) wr_commit |-> wr_ready);
  a_release: assert property (@(posedge clk) disable iff (!rst_n) rd_release |-> rd_valid);
  a_write:   assert property (@(posedge clk) disable iff (!rst_n) (|wr_en) |-> wr_ready);
endmodule
