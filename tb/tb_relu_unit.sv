// tb_relu_unit: self-checking test of the ReLU stage with the activation
// enabled and bypassed, over every 8-bit input value.
module tb_relu_unit;
  import gnn_pkg::*;
  localparam int L = 4;
  logic en; data_t x [L]; data_t y [L];
  int checks = 0, failures = 0;
  relu_unit #(.LANES(L)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int e = 0; e < 2; e++) begin
      en = e[0];
      for (int v = -128; v < 128; v++) begin
        for (int l = 0; l < L; l++) x[l] = data_t'(v + l * 37);
        #1;
        for (int l = 0; l < L; l++) begin
          int xi, exp;
          xi  = int'(x[l]);
          exp = (en && xi < 0) ? 0 : xi;
          checks++;
          if (int'(y[l]) != exp) begin failures++; $display("FAIL en=%0d x=%0d y=%0d", en, xi, y[l]); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
