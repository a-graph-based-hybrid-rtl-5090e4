// relu_unit: the ReLU stage. With `en` high each lane outputs max(x, 0); with
// `en` low (the two output FC layers, which feed the beamformer outputs
// directly) the lanes pass unchanged. Purely combinational. The paper names
// the ReLU unit and states that the MLP layers use a nonlinear activation;
// bypassing it on the output layers is this design's choice.
module relu_unit
  import gnn_pkg::*;
#(
  parameter int unsigned LANES = 4
) (
  input  logic  en,
  input  data_t x [LANES],
  output data_t y [LANES]
);

  always_comb begin
    for (int l = 0; l < LANES; l++)
      y[l] = (en && x[l] < 0) ? data_t'(0) : x[l];
  end

endmodule
