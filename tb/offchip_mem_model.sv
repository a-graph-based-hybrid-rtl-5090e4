// offchip_mem_model: behavioural model of the external memory the accelerator
// reads its inputs and weights from and writes its results to. Not
// synthesizable logic: a testbench-only stand-in for a memory controller.
// 64-bit beats, beat addresses. The read port grants a request on a cycle when
// `gnt_pattern` allows it (pseudo-random stalls) and returns the data LAT
// cycles later, in order. The write port grants likewise and stores the beat.
// The array `mem` is filled and inspected by the testbench hierarchically.
module offchip_mem_model
  import gnn_pkg::*;
#(
  parameter int unsigned WORDS = 1 << 18,
  parameter int unsigned LAT   = 4
) (
  input  logic  clk,
  input  logic  stall_en,
  input  logic  rd_req,
  input  addr_t rd_addr,
  output logic  rd_gnt,
  output logic  rd_rvalid,
  output beat_t rd_rdata,
  input  logic  wr_req,
  input  addr_t wr_addr,
  input  beat_t wr_data,
  output logic  wr_gnt
);

  beat_t mem [WORDS];
  logic  pipe_v [LAT];
  beat_t pipe_d [LAT];
  int unsigned lfsr = 32'h1234_5678;
  int unsigned rd_count = 0, wr_count = 0, stall_count = 0;

  initial begin
    for (int i = 0; i < LAT; i++) begin pipe_v[i] = 1'b0; pipe_d[i] = '0; end
  end

  always_ff @(posedge clk) lfsr <= {lfsr[30:0], lfsr[31] ^ lfsr[21] ^ lfsr[1] ^ lfsr[0]};

  assign rd_gnt    = !stall_en || (lfsr[2:0] != 3'd0);
  assign wr_gnt    = !stall_en || (lfsr[4:3] != 2'd0);
  assign rd_rvalid = pipe_v[LAT-1];
  assign rd_rdata  = pipe_d[LAT-1];

  always_ff @(posedge clk) begin
    pipe_v[0] <= rd_req && rd_gnt;
    pipe_d[0] <= (rd_addr < WORDS) ? mem[rd_addr] : '0;
    for (int i = 1; i < LAT; i++) begin
      pipe_v[i] <= pipe_v[i-1];
      pipe_d[i] <= pipe_d[i-1];
    end
    if (rd_req && rd_gnt) rd_count <= rd_count + 1;
    if (rd_req && !rd_gnt) stall_count <= stall_count + 1;
    if (wr_req && wr_gnt) begin
      if (wr_addr < WORDS) mem[wr_addr] <= wr_data;
      wr_count <= wr_count + 1;
    end
  end

endmodule
