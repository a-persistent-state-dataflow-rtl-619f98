// tb_gdn_input_buffers: writes random words into every buffer through the three
// write ports (with the job codes the AXI read masters use) and reads them back
// through the synchronous read ports, comparing with model arrays.
module tb_gdn_input_buffers;
  localparam int HQK = 4, HV = 8, D = 16;
  logic clk = 0;
  logic wr0_en = 0, wr1_en = 0, wr2_en = 0, wr1_job = 0, wr2_job = 0;
  logic [1:0] wr0_job = 0;
  logic [6:0] wr0_idx = 0;
  logic [2:0] wr1_idx = 0, wr2_idx = 0, h_addr = 0;
  logic [31:0] wr0_data = 0, wr1_data = 0, wr2_data = 0;
  logic [5:0] q_addr = 0, k_addr = 0;
  logic [6:0] v_addr = 0;
  logic [31:0] q_data, k_data, v_data, alpha_data, b_data, a_log_data, dt_data;
  logic [31:0] mq [HQK*D], mk [HQK*D], mv [HV*D], ma [HV], mb [HV], ml [HV], md [HV];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  gdn_input_buffers #(.HQK(HQK), .HV(HV), .D(D)) dut (.*);
  task automatic chk(input logic [31:0] got, input logic [31:0] e, input string nm);
    checks++;
    if (got !== e) begin failures++; if (failures < 10) $display("%s %h expected %h", nm, got, e); end
  endtask
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int i = 0; i < HQK * D; i++) begin
      mq[i] = $urandom; mk[i] = $urandom;
      @(negedge clk); wr0_en = 1; wr0_job = 0; wr0_idx = 7'(i); wr0_data = mq[i];
      @(negedge clk); wr0_job = 1; wr0_data = mk[i];
    end
    for (int i = 0; i < HV * D; i++) begin
      mv[i] = $urandom;
      @(negedge clk); wr0_job = 2; wr0_idx = 7'(i); wr0_data = mv[i];
    end
    @(negedge clk); wr0_en = 0;
    for (int h = 0; h < HV; h++) begin
      ma[h] = $urandom; mb[h] = $urandom; ml[h] = $urandom; md[h] = $urandom;
      @(negedge clk); wr1_en = 1; wr1_job = 0; wr1_idx = 3'(h); wr1_data = ma[h];
      wr2_en = 1; wr2_job = 0; wr2_idx = 3'(h); wr2_data = ml[h];
      @(negedge clk); wr1_job = 1; wr1_data = mb[h]; wr2_job = 1; wr2_data = md[h];
    end
    @(negedge clk); wr1_en = 0; wr2_en = 0;
    for (int n = 0; n < 500; n++) begin
      int qa, va, ha;
      qa = $urandom_range(HQK * D - 1, 0); va = $urandom_range(HV * D - 1, 0); ha = $urandom_range(HV - 1, 0);
      q_addr = 6'(qa); k_addr = 6'(HQK * D - 1 - qa); v_addr = 7'(va); h_addr = 3'(ha);
      @(posedge clk); #1;
      chk(q_data, mq[qa], "q"); chk(k_data, mk[HQK * D - 1 - qa], "k"); chk(v_data, mv[va], "v");
      chk(alpha_data, ma[ha], "alpha"); chk(b_data, mb[ha], "b"); chk(a_log_data, ml[ha], "a_log"); chk(dt_data, md[ha], "dt");
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
