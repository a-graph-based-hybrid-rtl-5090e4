// aggregation_unit: the neighbourhood aggregation of a graph convolution
// layer. It receives one feature index of all ROWS graph nodes at once (the
// outputs of the shared neighbour MLP) and returns, for every node k, the
// element-wise maximum over the other active nodes k' != k (max pooling,
// which does not depend on the order of the neighbours). `mask` marks the
// active nodes; a node with no active neighbour gets 0. Purely combinational,
// one feature index per cycle. The max pooling is the paper's aggregation
// function; processing all nodes of a feature index in parallel is this
// design's choice.
module aggregation_unit
  import gnn_pkg::*;
#(
  parameter int unsigned ROWS = 5
) (
  input  data_t           x    [ROWS],
  input  logic [ROWS-1:0] mask,
  output data_t           g    [ROWS]
);

  always_comb begin
    for (int k = 0; k < ROWS; k++) begin
      logic  any;
      data_t m;
      any = 1'b0;
      m   = '0;
      for (int n = 0; n < ROWS; n++) begin
        if (n != k && mask[n]) begin
          if (!any || x[n] > m) m = x[n];
          any = 1'b1;
        end
      end
      g[k] = m;
    end
  end

endmodule
