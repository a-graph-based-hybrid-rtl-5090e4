// add_unit: the ADD stage after the systolic array. For each of LANES
// accumulators it adds the layer's bias and requantises the sum back to the
// 8-bit data format:
//     y = sat8((acc + (bias << FRAC)) >>> FRAC)
// Activations and weights both carry FRAC fractional bits, so a product carries
// 2*FRAC; the bias (FRAC bits) is aligned to it before the add and the result
// is shifted back by FRAC with truncation toward minus infinity, then
// saturated to [-128, 127]. Purely combinational. The paper names an ADD unit;
// the bias alignment, truncation and saturation are this design's choices.
module add_unit
  import gnn_pkg::*;
#(
  parameter int unsigned LANES = 4
) (
  input  acc_t  acc  [LANES],
  input  data_t bias,
  output data_t y    [LANES]
);

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      acc_t s;
      s    = acc[l] + (acc_t'(bias) <<< FRAC);
      y[l] = sat8(s >>> FRAC);
    end
  end

endmodule
