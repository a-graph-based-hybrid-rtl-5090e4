// tb_aggregation_unit: self-checking test of the neighbourhood max pooling.
// For random node features and random active-node masks, each output is
// compared with the maximum over the other active nodes (0 when there is
// none), found by a search over a list of the neighbours in the testbench.
module tb_aggregation_unit;
  import gnn_pkg::*;
  localparam int R = 5;
  data_t x [R]; logic [R-1:0] mask; data_t g [R];
  int checks = 0, failures = 0;
  aggregation_unit #(.ROWS(R)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 3000; t++) begin
      for (int k = 0; k < R; k++) x[k] = data_t'($urandom);
      mask = (t % 3 == 0) ? '1 : R'($urandom);
      #1;
      for (int k = 0; k < R; k++) begin
        int vals[$];
        int exp;
        vals.delete();
        for (int n = 0; n < R; n++) if (n != k && mask[n]) vals.push_back(int'(x[n]));
        exp = (vals.size() == 0) ? 0 : -1000;
        foreach (vals[i]) if (vals[i] > exp) exp = vals[i];
        checks++;
        if (int'(g[k]) != exp) begin failures++; $display("FAIL k=%0d g=%0d exp=%0d", k, g[k], exp); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
