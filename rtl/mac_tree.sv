// mac_tree -- the 32-input FP16 MAC tree that performs the reduction of one PE
// line (step 3 of the WAQ LUT-GEMM: a weighted sum of Cartesian-product LUT
// values, weighted by the counts of each concatenated index).
//
// Each beat multiplies IN index counts (converted to FP16) by the IN matching
// LUT values, sums the IN products in a balanced binary adder tree and adds the
// tree sum to an accumulator register. With 256 LUT entries and 32 inputs a
// reduction takes 8 beats. The adder-tree shape and the accumulator are this
// design's choice; the paper gives the input count and FP16 arithmetic.
//
// Interface: when `en` is high the accumulator takes tree_sum (if `first`) or
// acc + tree_sum, on the rising clock edge. `acc` is the registered result.
module mac_tree
  import fp16_pkg::*;
#(
  parameter int unsigned IN   = oasis_pkg::MT_IN_DEF,
  parameter int unsigned CNTW = 13
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            en,
  input  logic            first,
  input  logic [CNTW-1:0] cnt [IN],
  input  fp16_t           val [IN],
  output fp16_t           acc
);
  fp16_t node [2*IN];  // node[1] is the root, node[IN+j] the products
  fp16_t tree_sum;

  always_comb begin
    for (int j = 0; j < int'(IN); j++)
      node[IN+j] = fp16_mul(fp16_from_uint(16'(cnt[j])), val[j]);
    for (int i = int'(IN) - 1; i >= 1; i--) node[i] = fp16_add(node[2*i], node[2*i+1]);
    node[0]  = FP16_ZERO;
    tree_sum = node[1];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) acc <= FP16_ZERO;
    else if (en) acc <= first ? tree_sum : fp16_add(acc, tree_sum);
  end
endmodule
