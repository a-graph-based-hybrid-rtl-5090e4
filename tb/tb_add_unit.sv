// tb_add_unit: self-checking test of the bias add and requantisation. Random
// and corner-case accumulators (including values that must saturate) and
// biases are applied; each lane is compared with
// clamp(floor((acc + bias * 2^FRAC) / 2^FRAC), -128, 127) computed in 64-bit
// integers in the testbench.
module tb_add_unit;
  import gnn_pkg::*;
  localparam int L = 4;
  acc_t acc [L]; data_t bias; data_t y [L];
  int checks = 0, failures = 0;
  add_unit #(.LANES(L)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint ref_y(longint a, longint b);
    longint s, q;
    s = a + b * (1 << FRAC);
    q = (s >= 0) ? s / (1 << FRAC) : -((-s + (1 << FRAC) - 1) / (1 << FRAC)); // floor
    if (q > 127) q = 127;
    if (q < -128) q = -128;
    return q;
  endfunction

  initial begin
    for (int t = 0; t < 2000; t++) begin
      for (int l = 0; l < L; l++) begin
        case ($urandom % 4)
          0: acc[l] = acc_t'($urandom);
          1: acc[l] = acc_t'($signed($urandom % 8192) - 4096);
          2: acc[l] = acc_t'($signed($urandom % 64) - 32);
          default: acc[l] = acc_t'($signed($urandom % 4096) - 2048);
        endcase
      end
      bias = data_t'($urandom);
      #1;
      for (int l = 0; l < L; l++) begin
        checks++;
        if (longint'(y[l]) != ref_y(longint'(acc[l]), longint'(bias))) begin
          failures++;
          $display("FAIL acc=%0d bias=%0d y=%0d exp=%0d", acc[l], bias, y[l], ref_y(longint'(acc[l]), longint'(bias)));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
