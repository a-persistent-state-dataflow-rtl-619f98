// fp32_sum_tree: combinational binary tree of N-1 fp32_add units summing N FP32
// values (N a power of two), pairwise: ((x0+x1)+(x2+x3))+... . Used to reduce
// the PK lane products of a tile in the processing elements and the q.k
// dot-product unit. The reduction order is this design's choice.
module fp32_sum_tree #(
  parameter int unsigned N = 16
) (
  input  logic [N-1:0][31:0] x,
  output logic [31:0]        y
);
  logic [31:0] node [2*N-1];
  for (genvar l = 0; l < N; l++) begin : g_leaf
    assign node[N-1+l] = x[l];
  end
  for (genvar i = 0; i < N - 1; i++) begin : g_add
    fp32_add u_add (.a(node[2*i+1]), .b(node[2*i+2]), .y(node[i]));
  end
  assign y = node[0];
endmodule
