// tb_systolic_array: self-checking test of the systolic array (4 x 4 and a
// non-square 3 x 5 instance). Random activation and weight matrices of random
// inner length are streamed in, tiles back to back; each result tile is
// compared with a matrix product formed in the testbench, and the cycle at
// which `done` rises is checked against K + ROWS + COLS - 3 edges after the
// first input edge.
module tb_systolic_array;
  import gnn_pkg::*;

  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // instance 0: 4 x 4
  data_t a0 [4]; data_t w0 [4]; acc_t acc0 [4][4];
  logic v0, f0, l0, d0;
  systolic_array #(.ROWS(4), .COLS(4)) dut0 (.clk, .rst_n, .a_in(a0), .w_in(w0),
    .valid_in(v0), .first_in(f0), .last_in(l0), .acc(acc0), .done(d0));
  // instance 1: 3 x 5
  data_t a1 [3]; data_t w1 [5]; acc_t acc1 [3][5];
  logic v1, f1, l1, d1;
  systolic_array #(.ROWS(3), .COLS(5)) dut1 (.clk, .rst_n, .a_in(a1), .w_in(w1),
    .valid_in(v1), .first_in(f1), .last_in(l1), .acc(acc1), .done(d1));

  int edge_cnt = 0;
  always @(posedge clk) edge_cnt++;

  data_t A [5][64];
  data_t W [64][5];
  longint E [5][5];

  task automatic make(input int R, input int C, input int K);
    for (int r = 0; r < R; r++) for (int k = 0; k < K; k++) A[r][k] = data_t'($urandom);
    for (int k = 0; k < K; k++) for (int c = 0; c < C; c++) W[k][c] = data_t'($urandom);
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
      E[r][c] = 0;
      for (int k = 0; k < K; k++) E[r][c] += longint'(A[r][k]) * longint'(W[k][c]);
    end
  endtask

  initial begin
    int K, t0;
    v0 = 0; f0 = 0; l0 = 0; v1 = 0; f1 = 0; l1 = 0;
    foreach (a0[i]) a0[i] = 0; foreach (w0[i]) w0[i] = 0;
    foreach (a1[i]) a1[i] = 0; foreach (w1[i]) w1[i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 12; t++) begin
      K = 1 + ($urandom % 40);
      make(4, 4, K);
      for (int k = 0; k < K; k++) begin
        @(negedge clk);
        if (k == 0) t0 = edge_cnt;
        for (int r = 0; r < 4; r++) a0[r] = A[r][k];
        for (int c = 0; c < 4; c++) w0[c] = W[k][c];
        v0 = 1; f0 = (k == 0); l0 = (k == K - 1);
      end
      @(negedge clk); v0 = 0; f0 = 0; l0 = 0;
      while (!d0) @(negedge clk);
      check(edge_cnt - t0 - 1 == K + 4 + 4 - 3, $sformatf("4x4 latency %0d for K=%0d", edge_cnt - t0 - 1, K));
      for (int r = 0; r < 4; r++) for (int c = 0; c < 4; c++)
        check(acc0[r][c] == acc_t'(E[r][c]), $sformatf("4x4 acc[%0d][%0d]", r, c));
    end
    for (int t = 0; t < 12; t++) begin
      K = 1 + ($urandom % 40);
      make(3, 5, K);
      for (int k = 0; k < K; k++) begin
        @(negedge clk);
        for (int r = 0; r < 3; r++) a1[r] = A[r][k];
        for (int c = 0; c < 5; c++) w1[c] = W[k][c];
        v1 = 1; f1 = (k == 0); l1 = (k == K - 1);
      end
      @(negedge clk); v1 = 0; f1 = 0; l1 = 0;
      while (!d1) @(negedge clk);
      for (int r = 0; r < 3; r++) for (int c = 0; c < 5; c++)
        check(acc1[r][c] == acc_t'(E[r][c]), $sformatf("3x5 acc[%0d][%0d]", r, c));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
