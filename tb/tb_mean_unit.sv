// tb_mean_unit: self-checking test of the mean node. Random rows and random
// row ranges; the output is compared with the sum over the range divided by
// its length, truncated toward zero, computed in the testbench.
module tb_mean_unit;
  import gnn_pkg::*;
  localparam int R = 5;
  data_t x [R]; row_t row_lo, row_cnt; data_t y;
  int checks = 0, failures = 0;
  mean_unit #(.ROWS(R)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 3000; t++) begin
      int lo, cnt, s, exp;
      for (int k = 0; k < R; k++) x[k] = data_t'($urandom);
      lo  = (t % 2) ? 0 : $urandom % R;
      cnt = (t % 2) ? R - 1 : 1 + $urandom % (R - lo);
      row_lo = row_t'(lo); row_cnt = row_t'(cnt);
      #1;
      s = 0;
      for (int k = lo; k < lo + cnt; k++) s += int'(x[k]);
      exp = (s < 0) ? -((-s) / cnt) : s / cnt;
      checks++;
      if (int'(y) != exp) begin failures++; $display("FAIL lo=%0d cnt=%0d y=%0d exp=%0d", lo, cnt, y, exp); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
