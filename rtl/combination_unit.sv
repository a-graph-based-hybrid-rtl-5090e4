// combination_unit: merges each graph node's own feature z[k] with its
// aggregated neighbourhood feature g[k] by a saturating element-wise add,
//     c[k] = sat8(z[k] + g[k]).
// The paper defines the combination as a concatenation followed by an MLP.
// An FC layer applied to a concatenation [z, g] equals W1*z + W2*g; the layer
// table lists every graph-convolution MLP as 256 x 256, so this design ties
// W1 = W2 and forms the sum here, before the 256 x 256 combination MLP. All
// nodes of one feature index are processed in parallel; combinational.
module combination_unit
  import gnn_pkg::*;
#(
  parameter int unsigned ROWS = 5
) (
  input  data_t z [ROWS],
  input  data_t g [ROWS],
  output data_t c [ROWS]
);

  always_comb begin
    for (int k = 0; k < ROWS; k++)
      c[k] = sat8(acc_t'(z[k]) + acc_t'(g[k]));
  end

endmodule
