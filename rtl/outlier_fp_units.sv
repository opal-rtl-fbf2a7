// outlier_fp_units: the four bfloat16 units of a compute lane.
//
// Each unit multiplies one outlier activation (bfloat16) by the weight of the
// same channel (bfloat16, converted from INT by the data distributor where the
// weight is not itself an outlier). The four products are summed by an
// fp_adder_tree (two levels for N = 4, so N must be a power of two); unused
// slots contribute zero. The paper gives the count
// (four per lane) and the job; the multiply-then-add-tree arrangement is this
// design's choice. Combinational.
module outlier_fp_units
  import opal_pkg::*;
#(
  parameter int N = N_OL
) (
  input  bf16_t [N-1:0] a,
  input  bf16_t [N-1:0] b,
  input  logic  [N-1:0] en,
  output bf16_t         sum
);
  bf16_t prod [N];
  for (genvar i = 0; i < N; i++) begin : g_mul
    assign prod[i] = en[i] ? bf16_mul(a[i], b[i]) : 16'h0000;
  end
  fp_adder_tree #(.N(N)) u_sum (.in(prod), .sum(sum));
endmodule
