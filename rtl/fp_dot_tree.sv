// fp_dot_tree: combinational W-lane dot product, sum_i a[i]*b[i].
//
// W multipliers feed a balanced binary tree of W-1 adders (heap order: node i
// adds nodes 2i+1 and 2i+2, the leaves are the products). This is the inner
// reduce circuit of the source's dot-product analysis; callers add pipeline
// registers or accumulate the result as their schedule needs. W must be a
// power of two.
module fp_dot_tree
  import fblas_pkg::*;
#(
  parameter int W = 16
) (
  input  fp32_t [W-1:0] a,
  input  fp32_t [W-1:0] b,
  output fp32_t         sum
);
  fp32_t tree [2*W-1];
  always_comb begin
    for (int i = 0; i < W; i++) tree[W-1+i] = fp_mul(a[i], b[i]);
    for (int i = W-2; i >= 0; i--) tree[i] = fp_add(tree[2*i+1], tree[2*i+2]);
  end
  assign sum = tree[0];
endmodule
