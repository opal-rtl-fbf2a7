// fp_adder_tree: bfloat16 adder tree over the results of the N = 8 lanes.
//
// Heap-ordered binary tree of N-1 bfloat16 adders (node i = node 2i+1 +
// node 2i+2). N must be a power of two. Combinational; the core registers the
// result. Used in the core for the eight lanes and, inside the softmax unit,
// for the eight scaled V values of one cycle.
module fp_adder_tree
  import opal_pkg::*;
#(
  parameter int N = 8
) (
  input  bf16_t in [N],
  output bf16_t sum
);
  bf16_t node [2*N-1];
  for (genvar i = 0; i < N; i++) begin : g_leaf
    assign node[N-1+i] = in[i];
  end
  for (genvar i = 0; i < N-1; i++) begin : g_node
    assign node[i] = bf16_add(node[2*i+1], node[2*i+2]);
  end
  assign sum = node[0];

  initial assert (N > 1 && (N & (N-1)) == 0) else $error("N must be a power of two");
endmodule
