// tb_gdn_state_bank: checks the dual-port state bank: contents start at zero,
// one-cycle read latency, simultaneous read and write of different addresses,
// read-old-data when both ports hit one address, against a model array.
module tb_gdn_state_bank;
  localparam int DEPTH = 256;
  logic clk = 0, rd_en = 0, wr_en = 0;
  logic [7:0] rd_addr = 0, wr_addr = 0;
  logic [31:0] rd_data, wr_data = 0;
  logic [31:0] model [DEPTH];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  gdn_state_bank #(.DEPTH(DEPTH), .W(32)) dut (.*);
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int i = 0; i < DEPTH; i++) model[i] = 0;
    for (int n = 0; n < 3000; n++) begin
      logic [31:0] expv;
      logic [7:0]  ra;
      @(negedge clk);
      ra = 8'($urandom); rd_addr = ra; rd_en = 1;
      wr_en = $urandom_range(1, 0) == 1; wr_addr = (n % 7 == 0) ? ra : 8'($urandom); wr_data = $urandom;
      expv = model[ra];
      @(posedge clk);
      #1;
      if (wr_en) model[wr_addr] = wr_data;
      checks++;
      if (rd_data !== expv) begin
        failures++; if (failures < 10) $display("addr %0d read %h expected %h", ra, rd_data, expv);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
