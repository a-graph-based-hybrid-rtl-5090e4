// tb_weight_dbuf: self-checking test of the ping-pong weight buffer (4
// columns, 16 deep). Tiles of random weights and biases are written as bus
// beats and read back as weight rows; the test checks the full/free flags of
// both banks (a third tile must wait until a bank is released), that writes
// to a full bank are ignored, and that the banks alternate.
module tb_weight_dbuf;
  import gnn_pkg::*;
  localparam int C = 4, D = 16, NB = 1 + D * C / 8;
  logic clk = 0, rst_n = 0;
  logic wr_en, wr_commit, wr_ready, rd_release, rd_ready;
  dim_t wr_beat, rd_k;
  beat_t wr_data;
  data_t rd_w [C]; data_t rd_bias [C];
  int checks = 0, failures = 0;
  data_t tw [2][D][C]; data_t tb [2][C];   // tiles in flight, by slot

  weight_dbuf #(.COLS(C), .DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic fill(input int slot);
    for (int k = 0; k < D; k++) for (int c = 0; c < C; c++) tw[slot][k][c] = data_t'($urandom);
    for (int c = 0; c < C; c++) tb[slot][c] = data_t'($urandom);
    for (int b = 0; b < NB; b++) begin
      @(negedge clk);
      wr_en = 1; wr_beat = dim_t'(b); wr_data = beat_t'({$urandom, $urandom});
      if (b == 0) for (int c = 0; c < C; c++) wr_data[8*c +: 8] = tb[slot][c];
      else for (int j = 0; j < 8; j++) wr_data[8*j +: 8] = tw[slot][((b-1)*8 + j) / C][((b-1)*8 + j) % C];
      wr_commit = (b == NB - 1);
    end
    @(negedge clk); wr_en = 0; wr_commit = 0;
  endtask

  task automatic drain(input int slot);
    check(rd_ready, "read bank full");
    for (int k = 0; k < D; k++) begin
      rd_k = dim_t'(k); #1;
      for (int c = 0; c < C; c++) check(rd_w[c] == tw[slot][k][c], $sformatf("slot %0d w[%0d][%0d]", slot, k, c));
    end
    for (int c = 0; c < C; c++) check(rd_bias[c] == tb[slot][c], "bias");
    @(negedge clk); rd_release = 1;
    @(negedge clk); rd_release = 0;
  endtask

  initial begin
    wr_en = 0; wr_commit = 0; rd_release = 0; rd_k = 0; wr_beat = 0; wr_data = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(wr_ready && !rd_ready, "empty after reset");
    for (int round = 0; round < 10; round++) begin
      fill(0);
      check(rd_ready && wr_ready, "one tile in, other bank free");
      fill(1);
      check(rd_ready && !wr_ready, "both banks full");
      // a write while both banks are full must be dropped
      @(negedge clk); wr_en = 1; wr_beat = 1; wr_data = '1; wr_commit = 1;
      @(negedge clk); wr_en = 0; wr_commit = 0;
      drain(0);
      check(rd_ready && wr_ready, "second tile readable, first bank free");
      drain(1);
      check(!rd_ready && wr_ready, "empty again");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
