// adder_tree -- sums N signed products in a balanced binary tree.
//
// Each PE of the accelerator ends in an adder tree that reduces its ICP
// products to one partial sum (paper, Fig. 4). The tree is built level by
// level: at level l, element i (i a multiple of 2^(l+1)) adds element
// i + 2^l to itself, so the adds of one level are independent and the depth
// is ceil(log2 N) adders. N may be any positive number. Purely
// combinational; the output is OUT_W bits wide, sign-extended.
module adder_tree #(
  parameter int N     = 32,
  parameter int IN_W  = 16,
  parameter int OUT_W = 24
) (
  input  logic signed [IN_W-1:0]  din [N],
  output logic signed [OUT_W-1:0] sum
);
  logic signed [OUT_W-1:0] v [N];

  always_comb begin
    for (int i = 0; i < N; i++) v[i] = OUT_W'(din[i]);
    for (int step = 1; step < N; step = step * 2)
      for (int i = 0; i + step < N; i = i + 2 * step)
        v[i] = v[i] + v[i+step];
    sum = v[0];
  end
endmodule
