// weight_loader: moves the network's weights and biases from off-chip memory
// into the weight double buffer, one tile at a time, ahead of the computation.
// It walks the same layer program as the control unit (layer_rom), skips the
// operations that need no weights, and for each FC layer streams
// ceil(dout / COLS) tiles. A tile is 1 bias beat followed by
// ceil(din * COLS / BUS_B) weight beats, read from consecutive beat addresses
// starting at `w_base`; the whole weight image is therefore one contiguous
// stream (layout in the README). A tile is fetched only when the fill bank of
// the double buffer is free (`wr_ready`), so the loader runs at most one tile
// ahead of the systolic array.
// Memory read port: `rd_req`/`rd_addr` is accepted when `rd_gnt` is high;
// responses return in order on `rd_rvalid`/`rd_rdata`, any number of cycles
// later, and are never back-pressured. `start` is a one-cycle pulse; `done`
// stays high from the last tile until the next start. The read data go to
// the double buffer unchanged (`wr_data` = `rd_rdata`): the loader only steers
// them, by beat number within the tile and by the commit at the tile's end.
// The paper gives the purpose (weights are moved from off-chip to on-chip
// memory through the double buffers over 64 bits of bandwidth); the tile order,
// stream layout and handshake are this design's choice.
module weight_loader
  import gnn_pkg::*;
#(
  parameter int unsigned I    = 2,
  parameter int unsigned J    = 2,
  parameter int unsigned NT   = 16,
  parameter int unsigned NU   = 2,
  parameter int unsigned NR   = 4,
  parameter int unsigned NRF  = 6,
  parameter int unsigned HID1 = 512,
  parameter int unsigned HID  = 256,
  parameter int unsigned COLS = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  addr_t w_base,
  output logic  done,
  // off-chip read port
  output logic  rd_req,
  output addr_t rd_addr,
  input  logic  rd_gnt,
  input  logic  rd_rvalid,
  input  beat_t rd_rdata,
  // double-buffer fill side
  output logic  wr_en,
  output dim_t  wr_beat,
  output beat_t wr_data,
  output logic  wr_commit,
  input  logic  wr_ready
);

  typedef enum logic [2:0] {S_IDLE, S_NEXT, S_WAIT, S_XFER, S_DONE} state_e;

  state_e     state;
  logic [4:0] pc;
  layer_t     layer;
  dim_t       tile, ntiles, nbeats, issued, recvd;
  addr_t      addr;

  layer_rom #(.I(I), .J(J), .NT(NT), .NU(NU), .NR(NR), .NRF(NRF), .HID1(HID1), .HID(HID))
    u_rom (.idx(pc), .layer(layer));

  assign rd_req    = (state == S_XFER) && (issued < nbeats);
  assign rd_addr   = addr;
  assign wr_en     = (state == S_XFER) && rd_rvalid;
  assign wr_beat   = recvd;
  assign wr_data   = rd_rdata;
  assign wr_commit = wr_en && (recvd == nbeats - 1);
  assign done      = (state == S_DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      pc     <= '0;
      tile   <= '0;
      ntiles <= '0;
      nbeats <= '0;
      issued <= '0;
      recvd  <= '0;
      addr   <= '0;
    end else begin
      case (state)
        S_IDLE, S_DONE: begin
          if (start) begin
            pc    <= '0;
            addr  <= w_base;
            state <= S_NEXT;
          end
        end
        S_NEXT: begin
          if (layer.op == OP_END) begin
            state <= S_DONE;
          end else if (layer.op != OP_FC) begin
            pc <= pc + 1'b1;
          end else begin
            tile   <= '0;
            ntiles <= dim_t'((int'(layer.dout) + COLS - 1) / COLS);
            nbeats <= dim_t'(1 + (int'(layer.din) * COLS + BUS_B - 1) / BUS_B);
            state  <= S_WAIT;
          end
        end
        S_WAIT: begin
          if (wr_ready) begin
            issued <= '0;
            recvd  <= '0;
            state  <= S_XFER;
          end
        end
        S_XFER: begin
          if (rd_req && rd_gnt) begin
            issued <= issued + 1'b1;
            addr   <= addr + 1'b1;
          end
          if (rd_rvalid) begin
            recvd <= recvd + 1'b1;
            if (recvd == nbeats - 1) begin
              if (tile == ntiles - 1) begin
                pc    <= pc + 1'b1;
                state <= S_NEXT;
              end else begin
                tile  <= tile + 1'b1;
                state <= S_WAIT;
              end
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // responses only arrive for requests this loader issued
  assert property (@(posedge clk) disable iff (!rst_n) rd_rvalid |-> (state == S_XFER && recvd < issued))
    else $error("weight_loader: unexpected read response");

endmodule
