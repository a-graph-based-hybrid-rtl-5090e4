// layer_rom: the layer program of one GNN, as read by the control unit and the
// weight loader. Entry `idx` is a layer descriptor (gnn_pkg::layer_t); the
// program is fixed by the network shape parameters and ends with OP_END.
// Banks: A = 0, B = 1, C = 2 of the feature buffer. Graph rows: users
// 0 .. I-1, targets I .. I+J-1, mean row I+J.
//   0  FC   A->B users   2*NT*NU -> HID1  ReLU   input MLP, communication
//   1  FC   B->C users   HID1 -> HID         ReLU
//   2  FC   A->B targets 2*NT*NR -> HID1  ReLU   input MLP, sensing
//   3  FC   B->C targets HID1 -> HID         ReLU
//   4  MEAN C->C row I+J = mean of rows 0 .. I+J-1
//   5  FC   C->A all     HID -> HID  ReLU        graph conv 1: neighbour MLP
//   6  FC   A->B all     HID -> HID  ReLU
//   7  AGG  max(B) + C -> A                      aggregation + combination
//   8  FC   A->B all     HID -> HID  ReLU        combination MLP
//   9  FC   B->A all     HID -> HID  ReLU
//  10..14 the same for graph conv 2 (A->B->C, AGG C+A->B, B->C->B)
//  15  FC   B->A rows 0 .. I+J-1  HID -> 2*NRF   digital beamformers w
//  16  FC   B->C row I+J          HID -> NT*NRF  analog beamformer F
//  17  END
// Layer sizes are those of the paper's GNN setup table; the bank allocation
// and the order of operations are this design's choice. Combinational.
module layer_rom
  import gnn_pkg::*;
#(
  parameter int unsigned I    = 2,
  parameter int unsigned J    = 2,
  parameter int unsigned NT   = 16,
  parameter int unsigned NU   = 2,
  parameter int unsigned NR   = 4,
  parameter int unsigned NRF  = 6,
  parameter int unsigned HID1 = 512,
  parameter int unsigned HID  = 256
) (
  input  logic [4:0] idx,
  output layer_t     layer
);

  localparam bank_t BA = 2'd0, BB = 2'd1, BC = 2'd2;
  localparam row_t  RI  = row_t'(I);
  localparam row_t  RJ  = row_t'(J);
  localparam row_t  RIJ = row_t'(I + J);
  localparam row_t  RK  = row_t'(I + J + 1);

  function automatic layer_t fc(bank_t s, bank_t d, row_t lo, row_t cnt,
                                int unsigned din, int unsigned dout, logic relu);
    layer_t l;
    l         = '0;
    l.op      = OP_FC;
    l.src     = s;
    l.dst     = d;
    l.row_lo  = lo;
    l.row_cnt = cnt;
    l.din     = dim_t'(din);
    l.dout    = dim_t'(dout);
    l.relu    = relu;
    return l;
  endfunction

  function automatic layer_t agg(bank_t s, bank_t s2, bank_t d);
    layer_t l;
    l         = '0;
    l.op      = OP_AGG;
    l.src     = s;
    l.src2    = s2;
    l.dst     = d;
    l.row_lo  = '0;
    l.row_cnt = RK;
    l.din     = dim_t'(HID);
    return l;
  endfunction

  always_comb begin
    layer = '0;
    layer.op = OP_END;
    case (idx)
      5'd0:  layer = fc(BA, BB, '0, RI, 2*NT*NU, HID1, 1'b1);
      5'd1:  layer = fc(BB, BC, '0, RI, HID1, HID, 1'b1);
      5'd2:  layer = fc(BA, BB, RI, RJ, 2*NT*NR, HID1, 1'b1);
      5'd3:  layer = fc(BB, BC, RI, RJ, HID1, HID, 1'b1);
      5'd4: begin
        layer.op      = OP_MEAN;
        layer.src     = BC;
        layer.dst     = BC;
        layer.row_lo  = '0;
        layer.row_cnt = RIJ;
        layer.dst_row = RIJ;
        layer.din     = dim_t'(HID);
      end
      5'd5:  layer = fc(BC, BA, '0, RK, HID, HID, 1'b1);
      5'd6:  layer = fc(BA, BB, '0, RK, HID, HID, 1'b1);
      5'd7:  layer = agg(BB, BC, BA);
      5'd8:  layer = fc(BA, BB, '0, RK, HID, HID, 1'b1);
      5'd9:  layer = fc(BB, BA, '0, RK, HID, HID, 1'b1);
      5'd10: layer = fc(BA, BB, '0, RK, HID, HID, 1'b1);
      5'd11: layer = fc(BB, BC, '0, RK, HID, HID, 1'b1);
      5'd12: layer = agg(BC, BA, BB);
      5'd13: layer = fc(BB, BC, '0, RK, HID, HID, 1'b1);
      5'd14: layer = fc(BC, BB, '0, RK, HID, HID, 1'b1);
      5'd15: layer = fc(BB, BA, '0, RIJ, HID, 2*NRF, 1'b0);
      5'd16: layer = fc(BB, BC, RIJ, row_t'(1), HID, NT*NRF, 1'b0);
      default: ;
    endcase
  end

endmodule
