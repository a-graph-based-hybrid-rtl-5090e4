// tb_weight_loader: self-checking test of the weight loader on a small
// network (I = J = 1, NT = 2, NU = 1, NR = 2, NRF = 2, hidden widths 8, 4
// columns). Memory grants stall pseudo-randomly and the fill bank is held busy
// for random spans after each tile. Worked out by hand for that network: 26
// tiles (2+2+2+2 input MLP, 16 graph conv, 1+1 output), 2 of 3 beats (din 4)
// and 24 of 5 beats (din 8), 126 beats in all. The
// test checks each beat's data against the memory word at the next stream
// address, the beat numbering inside each tile, the tile and beat totals,
// that nothing is written while the fill bank is busy, and `done`.
module tb_weight_loader;
  import gnn_pkg::*;
  localparam addr_t W_BASE = 32'h40;
  logic clk = 0, rst_n = 0, start = 0, done;
  logic rd_req, rd_gnt, rd_rvalid, wr_en, wr_commit, wr_ready;
  addr_t rd_addr; beat_t rd_rdata, wr_data; dim_t wr_beat;
  logic stall_en = 1;
  logic mwr_req = 0, mwr_gnt; addr_t mwr_addr = 0; beat_t mwr_data = 0;
  int checks = 0, failures = 0;

  weight_loader #(.I(1), .J(1), .NT(2), .NU(1), .NR(2), .NRF(2), .HID1(8), .HID(8), .COLS(4)) dut (
    .clk, .rst_n, .start, .w_base(W_BASE), .done, .rd_req, .rd_addr, .rd_gnt, .rd_rvalid,
    .rd_rdata, .wr_en, .wr_beat, .wr_data, .wr_commit, .wr_ready);

  offchip_mem_model #(.WORDS(1024), .LAT(3)) u_mem (
    .clk, .stall_en, .rd_req, .rd_addr, .rd_gnt, .rd_rvalid, .rd_rdata,
    .wr_req(mwr_req), .wr_addr(mwr_addr), .wr_data(mwr_data), .wr_gnt(mwr_gnt));

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  int beats = 0, tiles = 0, in_tile = 0, busy_left = 0;
  int tile_beats [$];
  assign wr_ready = (busy_left == 0);

  always @(posedge clk) if (rst_n) begin
    if (busy_left > 0) busy_left <= busy_left - 1;
    if (wr_en) begin
      check(wr_ready, "no write while the fill bank is busy");
      check(wr_data == u_mem.mem[W_BASE + beats], $sformatf("beat %0d data", beats));
      check(int'(wr_beat) == in_tile, $sformatf("beat number %0d in tile (exp %0d)", wr_beat, in_tile));
      beats <= beats + 1;
      in_tile <= in_tile + 1;
      if (wr_commit) begin
        tiles <= tiles + 1;
        tile_beats.push_back(in_tile + 1);
        in_tile <= 0;
        busy_left <= $urandom % 12;
      end
    end
  end

  initial begin
    for (int i = 0; i < 1024; i++) u_mem.mem[i] = {$urandom, $urandom};
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    @(negedge clk);
    check(tiles == 26, $sformatf("tiles %0d", tiles));
    check(beats == 126, $sformatf("beats %0d", beats));
    check(tile_beats.size() == 26 && tile_beats[0] == 3 && tile_beats[1] == 3 && tile_beats[2] == 5 &&
          tile_beats[25] == 5, "beats per tile");
    check(u_mem.stall_count > 0, "grant stalls exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
