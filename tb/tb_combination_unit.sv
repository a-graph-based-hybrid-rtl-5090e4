// tb_combination_unit: self-checking test of the saturating combination add
// over random and extreme 8-bit operands.
module tb_combination_unit;
  import gnn_pkg::*;
  localparam int R = 5;
  data_t z [R]; data_t g [R]; data_t c [R];
  int checks = 0, failures = 0;
  combination_unit #(.ROWS(R)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 3000; t++) begin
      for (int k = 0; k < R; k++) begin
        z[k] = data_t'($urandom); g[k] = data_t'($urandom);
      end
      if (t == 0) begin z[0] = 127; g[0] = 127; z[1] = -128; g[1] = -128; end
      #1;
      for (int k = 0; k < R; k++) begin
        int s;
        s = int'(z[k]) + int'(g[k]);
        if (s > 127) s = 127;
        if (s < -128) s = -128;
        checks++;
        if (int'(c[k]) != s) begin failures++; $display("FAIL z=%0d g=%0d c=%0d", z[k], g[k], c[k]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
