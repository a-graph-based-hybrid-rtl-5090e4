// gnn_pkg: types and constants shared by the GNN inference accelerator.
//
// Numbers are 8-bit signed fixed point (the 8-bit precision the accelerator is
// evaluated with); products are accumulated in 32 bits. The off-chip data bus
// is 64 bits wide, i.e. eight bytes per beat. The layer descriptor is the
// instruction format of the control unit: one descriptor per fully connected
// (FC) layer or per vector operation (mean row, aggregation + combination).
// The fractional-bit count and the accumulator width are this design's choice.
package gnn_pkg;

  localparam int unsigned DATA_W   = 8;   // activation / weight / bias width
  localparam int unsigned ACC_W    = 32;  // accumulator width
  localparam int unsigned FRAC     = 4;   // fractional bits of every 8-bit value
  localparam int unsigned BUS_W    = 64;  // off-chip bus width
  localparam int unsigned BUS_B    = BUS_W / 8;
  localparam int unsigned ADDR_W   = 32;  // off-chip beat address width
  localparam int unsigned DIM_W    = 11;  // width of a feature-dimension count
  localparam int unsigned ROW_W    = 4;   // width of a graph-row index
  localparam int unsigned NBANK    = 3;   // feature buffer banks

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [ACC_W-1:0]  acc_t;
  typedef logic [BUS_W-1:0]         beat_t;
  typedef logic [ADDR_W-1:0]        addr_t;
  typedef logic [DIM_W-1:0]         dim_t;
  typedef logic [ROW_W-1:0]         row_t;
  typedef logic [1:0]               bank_t;

  typedef enum logic [1:0] {
    OP_FC   = 2'd0,  // fully connected layer on the systolic array
    OP_MEAN = 2'd1,  // write the mean of rows [row_lo, row_lo+row_cnt) into row `dst_row`
    OP_AGG  = 2'd2,  // aggregation (max over neighbours) + combination (add own feature)
    OP_END  = 2'd3   // end of the layer program
  } op_e;

  typedef struct packed {
    op_e   op;
    bank_t src;      // input bank (FC, MEAN) / aggregated bank (AGG)
    bank_t src2;     // own-feature bank (AGG)
    bank_t dst;      // output bank
    row_t  row_lo;   // first graph row the operation covers
    row_t  row_cnt;  // number of graph rows
    row_t  dst_row;  // row written by MEAN
    dim_t  din;      // input features (FC) / features processed (MEAN, AGG)
    dim_t  dout;     // output features (FC)
    logic  relu;     // apply ReLU to the FC output
  } layer_t;

  // Saturate a wide signed value to the 8-bit data range.
  function automatic data_t sat8(input logic signed [ACC_W-1:0] v);
    if (v > 127)       return data_t'(127);
    else if (v < -128) return data_t'(-128);
    else               return data_t'(v);
  endfunction

  function automatic int unsigned cdiv(input int unsigned a, input int unsigned b);
    return (a + b - 1) / b;
  endfunction

endpackage
