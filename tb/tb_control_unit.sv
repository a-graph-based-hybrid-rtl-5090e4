// tb_control_unit: self-checking test of the sequencer on its own, on a small
// network (I = J = 1, NT = 2, NU = 1, NR = 2, NRF = 2, hidden widths 8) and a
// 2 x 4 array, so that the 3 graph rows need two row tiles. The datapath is
// replaced by simple models: the feature buffer returns a known pattern
// f(bank, index, row), the array answers `done` 3 cycles after `last`, the
// double buffer holds a tile back for random spans. Counts worked out by hand
// for that network are checked: 2 input beats and 12 input byte writes, 42
// array tiles with 328 streamed columns, 26 weight-tile releases, 168 stored
// columns covering 236 row entries, 24 vector-step writes, and 3 result beats
// at the output addresses holding the pattern of the result rows.
module tb_control_unit;
  import gnn_pkg::*;
  localparam int ROWS = 3, SR = 2, SC = 4;
  localparam addr_t IN_BASE = 32'h20, OUT_BASE = 32'h80;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic rd_own, rd_req, rd_gnt, rd_rvalid, wr_req, wr_gnt;
  addr_t rd_addr, wr_addr; beat_t rd_rdata, wr_data;
  logic wl_start, wb_release, wb_ready;
  dim_t wb_rd_k;
  bank_t fb_rd0_bank, fb_rd1_bank, fb_wr_bank;
  dim_t fb_rd0_idx, fb_rd1_idx, fb_wr_idx;
  data_t fb_rd0_data [ROWS]; data_t fb_wr_data [ROWS];
  logic fb_wr_en; logic [ROWS-1:0] fb_wr_mask;
  data_t sa_a [SR];
  logic sa_valid, sa_first, sa_last, sa_done;
  logic [$clog2(SC+1)-1:0] st_col;
  logic relu_en;
  data_t post_data [SR];
  logic [ROWS-1:0] row_mask;
  row_t mean_lo, mean_cnt;
  data_t mean_data; data_t agg_data [ROWS];
  logic [31:0] perf_cycles, perf_wstall;
  logic stall_en = 1;
  int checks = 0, failures = 0;

  control_unit #(.I(1), .J(1), .NT(2), .NU(1), .NR(2), .NRF(2), .HID1(8), .HID(8),
                 .SA_R(SR), .SA_C(SC)) dut (.*, .in_base(IN_BASE), .out_base(OUT_BASE));

  offchip_mem_model #(.WORDS(256), .LAT(2)) u_mem (
    .clk, .stall_en, .rd_req, .rd_addr, .rd_gnt, .rd_rvalid, .rd_rdata,
    .wr_req, .wr_addr, .wr_data, .wr_gnt);

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

  function automatic data_t pat(input int bank, input int idx, input int row);
    return data_t'((bank * 37 + idx * 5 + row * 11) & 127);
  endfunction

  // datapath models
  always_comb for (int q = 0; q < ROWS; q++) fb_rd0_data[q] = pat(int'(fb_rd0_bank), int'(fb_rd0_idx), q);
  always_comb for (int r = 0; r < SR; r++) post_data[r] = data_t'(r + 1);
  assign mean_data = 8'sd5;
  always_comb for (int q = 0; q < ROWS; q++) agg_data[q] = data_t'(q);

  int done_in = 0, hold = 20;
  assign sa_done = (done_in == 1);
  assign wb_ready = (hold == 0);
  always @(posedge clk) begin
    if (done_in > 0) done_in <= done_in - 1;
    if (sa_valid && sa_last) done_in <= 3;
    if (hold > 0) hold <= hold - 1;
    if (wb_release) hold <= $urandom % 10;
  end

  int n_in_rd = 0, n_in_wr = 0, n_tiles = 0, n_cols = 0, n_rel = 0, n_store = 0, n_store_rows = 0;
  int n_vec = 0, n_out = 0, n_done = 0;
  localparam int ST_STORE = 8, ST_VEC = 9;
  always @(posedge clk) if (rst_n) begin
    if (rd_own && rd_req && rd_gnt) begin
      check(rd_addr == IN_BASE + n_in_rd, "input read address");
      n_in_rd++;
    end
    if (rd_own && fb_wr_en) n_in_wr++;
    if (sa_valid) n_cols++;
    if (sa_valid && sa_last) n_tiles++;
    if (sa_valid) check(wb_ready, "weights present while streaming");
    if (wb_release) n_rel++;
    if (fb_wr_en && int'(dut.state) == ST_STORE) begin
      n_store++;
      n_store_rows += $countones(fb_wr_mask);
    end
    if (fb_wr_en && int'(dut.state) == ST_VEC) n_vec++;
    if (wr_req && wr_gnt) begin
      check(wr_addr == OUT_BASE + n_out, "output write address");
      for (int n = 0; n < 8; n++) begin
        int exp;
        if (n_out < 2) exp = (n < 4) ? int'(pat(0, n, n_out)) : 0;
        else           exp = (n < 4) ? int'(pat(2, n, 2)) : 0;
        check(int'($signed(wr_data[8*n +: 8])) == exp, $sformatf("result beat %0d byte %0d", n_out, n));
      end
      n_out++;
    end
    if (done) n_done++;
  end

  initial begin
    for (int i = 0; i < 256; i++) u_mem.mem[i] = {$urandom, $urandom};
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    check(busy, "busy after start");
    while (!done) @(negedge clk);
    repeat (4) @(negedge clk);
    check(!busy, "idle after done");
    check(n_in_rd == 2, $sformatf("input beats %0d", n_in_rd));
    check(n_in_wr == 12, $sformatf("input byte writes %0d", n_in_wr));
    check(n_tiles == 42, $sformatf("array tiles %0d", n_tiles));
    check(n_cols == 328, $sformatf("streamed columns %0d", n_cols));
    check(n_rel == 26, $sformatf("weight releases %0d", n_rel));
    check(n_store == 168, $sformatf("stored columns %0d", n_store));
    check(n_store_rows == 236, $sformatf("stored row entries %0d", n_store_rows));
    check(n_vec == 24, $sformatf("vector writes %0d", n_vec));
    check(n_out == 3, $sformatf("result beats %0d", n_out));
    check(n_done == 1, "one done pulse");
    check(perf_wstall > 0, "weight-wait stalls counted");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
