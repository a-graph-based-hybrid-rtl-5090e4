// weight_dbuf: ping-pong (double) buffer for weight tiles. A tile is the bias
// and the weights of COLS output neurons of one FC layer over all of its DEPTH
// (at most) inputs. While the systolic array reads one bank, the weight loader
// fills the other, so off-chip transfer and computation overlap.
// Write side: beats of BUS_B bytes arrive with their index in the tile stream;
// beat 0 carries the COLS biases in its low bytes, beat b >= 1 carries weight
// bytes (b-1)*BUS_B .. (b-1)*BUS_B+BUS_B-1 of the tile, stored k-major
// (byte k*COLS + c is W[k][c]). `wr_commit` marks the fill bank full and moves
// to the other bank; `wr_ready` says the fill bank is free.
// Read side: `rd_k` selects one weight row (combinational read), `rd_bias` the
// tile's biases; `rd_ready` says the read bank is full and `rd_release` frees
// it and moves to the other bank. Both pointers start at bank 0 after reset.
// The ping-pong scheme is the paper's; tile shape and beat layout are this
// design's choice.
module weight_dbuf
  import gnn_pkg::*;
#(
  parameter int unsigned COLS  = 4,
  parameter int unsigned DEPTH = 512
) (
  input  logic  clk,
  input  logic  rst_n,
  // fill side
  input  logic  wr_en,
  input  dim_t  wr_beat,
  input  beat_t wr_data,
  input  logic  wr_commit,
  output logic  wr_ready,
  // compute side
  input  dim_t  rd_k,
  output data_t rd_w    [COLS],
  output data_t rd_bias [COLS],
  input  logic  rd_release,
  output logic  rd_ready
);

  localparam int unsigned WPB = BUS_B / COLS;        // weight rows per beat
  localparam int unsigned AW  = $clog2(2 * DEPTH);

  // one word = one weight row W[k][0..COLS-1]; bank b holds words b*DEPTH .. b*DEPTH+DEPTH-1
  logic [8*COLS-1:0] wmem [2 * DEPTH];
  logic [8*COLS-1:0] bmem [2];
  logic  full [2];
  logic  wsel, rsel;

  assign wr_ready = !full[wsel];
  assign rd_ready = full[rsel];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full[0] <= 1'b0;
      full[1] <= 1'b0;
      wsel    <= 1'b0;
      rsel    <= 1'b0;
    end else begin
      if (wr_commit && !full[wsel]) begin
        full[wsel] <= 1'b1;
        wsel       <= ~wsel;
      end
      if (rd_release && full[rsel]) begin
        full[rsel] <= 1'b0;
        rsel       <= ~rsel;
      end
    end
  end

  // tile storage, not reset: a tile is read only after it has been written
  always_ff @(posedge clk) begin
    if (wr_en && !full[wsel]) begin
      if (wr_beat == 0) begin
        bmem[wsel] <= wr_data[8*COLS-1:0];
      end else begin
        for (int j = 0; j < WPB; j++) begin
          int unsigned k;
          k = (int'(wr_beat) - 1) * WPB + j;
          if (k < DEPTH) wmem[AW'(int'(wsel) * DEPTH + k)] <= wr_data[8*COLS*j +: 8*COLS];
        end
      end
    end
  end

  logic [8*COLS-1:0] rword;
  assign rword = (int'(rd_k) < DEPTH) ? wmem[AW'(int'(rsel) * DEPTH + int'(rd_k))] : '0;

  always_comb begin
    for (int c = 0; c < COLS; c++) begin
      rd_w[c]    = rword[8*c +: 8];
      rd_bias[c] = bmem[rsel][8*c +: 8];
    end
  end

  // a commit and a release of the same bank cannot coincide: commit needs it empty,
  // release full
  initial assert (COLS <= BUS_B && BUS_B % COLS == 0)
    else $error("weight_dbuf: COLS must divide the bus beat");

endmodule
