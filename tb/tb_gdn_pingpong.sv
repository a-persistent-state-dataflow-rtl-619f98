// tb_gdn_pingpong: checks the ping-pong channel: a producer fills banks with a
// known pattern and commits, a consumer checks the contents and releases,
// with random delays on both sides; checks that the producer is held off when
// both banks are full, that data are seen in commit order, and that a bank can
// be refilled while the other is being read.
module tb_gdn_pingpong;
  localparam int N = 8;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] wr_en = '0;
  logic [N-1:0][31:0] wr_data = '0, rd_data;
  logic wr_commit = 0, wr_ready, rd_valid, rd_release = 0;
  int checks = 0, failures = 0, full_seen = 0, overlap_seen = 0;
  always #5 clk = ~clk;
  gdn_pingpong #(.N(N), .W(32)) dut (.*);

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : producer
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int b = 0; b < 40; b++) begin
      while (!wr_ready) begin full_seen++; @(negedge clk); end
      for (int i = 0; i < N; i++) begin
        wr_en = '0; wr_en[i] = 1'b1;
        for (int j = 0; j < N; j++) wr_data[j] = 32'(b * 1000 + i);
        @(negedge clk);
        if (rd_valid) overlap_seen++;
      end
      wr_en = '0;
      wr_commit = 1;
      @(negedge clk);
      wr_commit = 0;
      repeat ($urandom_range(3, 0)) @(negedge clk);
    end
  end

  initial begin : consumer
    @(posedge rst_n);
    for (int b = 0; b < 40; b++) begin
      @(negedge clk);
      while (!rd_valid) @(negedge clk);
      repeat ($urandom_range(30, 0)) @(negedge clk);
      for (int i = 0; i < N; i++) begin
        checks++;
        if (rd_data[i] !== 32'(b * 1000 + i)) begin
          failures++; $display("bank %0d word %0d = %0d", b, i, rd_data[i]);
        end
      end
      rd_release = 1;
      @(negedge clk);
      rd_release = 0;
    end
    checks++; if (full_seen == 0) begin failures++; $display("producer never blocked"); end
    checks++; if (overlap_seen == 0) begin failures++; $display("no overlap of fill and read"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
