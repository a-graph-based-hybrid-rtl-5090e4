// mean_unit: forms the extra graph node of the GNN, the mean of the user and
// target feature rows. For one feature index it adds rows
// [row_lo, row_lo + row_cnt) of the input word and divides by row_cnt, the
// quotient truncated toward zero (row_cnt = 0 gives 0). Purely combinational,
// one feature index per cycle. The averaging is the paper's; the integer
// division is this design's choice.
module mean_unit
  import gnn_pkg::*;
#(
  parameter int unsigned ROWS = 5
) (
  input  data_t x       [ROWS],
  input  row_t  row_lo,
  input  row_t  row_cnt,
  output data_t y
);

  logic signed [15:0] sum;
  logic signed [15:0] q;

  always_comb begin
    sum = '0;
    for (int k = 0; k < ROWS; k++)
      if (k >= int'(row_lo) && k < int'(row_lo) + int'(row_cnt))
        sum += 16'(x[k]);
    q = (row_cnt == 0) ? 16'sd0 : sum / $signed({12'd0, row_cnt});
    y = data_t'(q);
  end

endmodule
