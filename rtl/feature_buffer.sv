// feature_buffer: the intermediate result buffer. NBANK banks, each DEPTH
// feature indices deep; one word holds feature index d of all ROWS graph nodes
// (one byte per node), so a single read gives the systolic array a whole column
// of activations. A layer reads its input from one bank and writes its output
// to another, so outputs stay on chip and feed the next layer directly (layer
// fusion); three banks are needed because a graph-convolution layer must keep
// its input until the combination step.
// Two combinational read ports (bank, index) and one write port with a per-row
// byte mask, written on the rising clock edge. The storage is not reset; the
// sequencer writes every location before it reads it.
// The paper gives the buffer's purpose; bank count, word layout and ports are
// this design's choice.
module feature_buffer
  import gnn_pkg::*;
#(
  parameter int unsigned ROWS  = 5,
  parameter int unsigned DEPTH = 512
) (
  input  logic            clk,
  // read port 0
  input  bank_t           rd0_bank,
  input  dim_t            rd0_idx,
  output data_t           rd0_data [ROWS],
  // read port 1
  input  bank_t           rd1_bank,
  input  dim_t            rd1_idx,
  output data_t           rd1_data [ROWS],
  // write port
  input  logic            wr_en,
  input  bank_t           wr_bank,
  input  dim_t            wr_idx,
  input  logic [ROWS-1:0] wr_mask,
  input  data_t           wr_data [ROWS]
);

  // one memory per graph row, NBANK * DEPTH bytes, addressed bank * DEPTH + index;
  // storage is not reset: every location is written before it is read
  localparam int unsigned AW = $clog2(NBANK * DEPTH);

  function automatic logic [AW-1:0] loc(input bank_t b, input dim_t i);
    return AW'(int'(b) * DEPTH + int'(i));
  endfunction

  logic wr_ok, rd0_ok, rd1_ok;
  assign wr_ok  = wr_en && int'(wr_bank) < NBANK && int'(wr_idx) < DEPTH;
  assign rd0_ok = int'(rd0_bank) < NBANK && int'(rd0_idx) < DEPTH;
  assign rd1_ok = int'(rd1_bank) < NBANK && int'(rd1_idx) < DEPTH;

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    data_t mem [NBANK * DEPTH];
    always_ff @(posedge clk) begin
      if (wr_ok && wr_mask[r]) mem[loc(wr_bank, wr_idx)] <= wr_data[r];
    end
    assign rd0_data[r] = rd0_ok ? mem[loc(rd0_bank, rd0_idx)] : '0;
    assign rd1_data[r] = rd1_ok ? mem[loc(rd1_bank, rd1_idx)] : '0;
  end

endmodule
