// int_adder_tree: balanced binary tree adding N signed integers.
//
// Sums the N = 128 partial products of a lane's 32 INT MUs (4 each) in one
// combinational tree of N-1 adders, laid out as a heap: node i adds nodes
// 2i+1 and 2i+2, leaves are the inputs. The output is wide enough that it
// cannot overflow. N must be a power of two. Combinational.
module int_adder_tree #(
  parameter int N     = 128,
  parameter int IN_W  = 9,
  parameter int OUT_W = IN_W + $clog2(N)
) (
  input  logic signed [IN_W-1:0]  in [N],
  output logic signed [OUT_W-1:0] sum
);
  logic signed [OUT_W-1:0] node [2*N-1];

  for (genvar i = 0; i < N; i++) begin : g_leaf
    assign node[N-1+i] = OUT_W'(in[i]);
  end
  for (genvar i = 0; i < N-1; i++) begin : g_node
    assign node[i] = node[2*i+1] + node[2*i+2];
  end
  assign sum = node[0];

  initial assert (N > 1 && (N & (N-1)) == 0) else $error("N must be a power of two");
endmodule
