// tb_feature_buffer: self-checking test of the intermediate result buffer
// (5 rows, 64 deep, 3 banks). Every location is first written, then random
// masked writes and random reads on both ports are compared with a shadow
// copy kept in the testbench; out-of-range reads must return 0.
module tb_feature_buffer;
  import gnn_pkg::*;
  localparam int R = 5, D = 64;
  logic clk = 0;
  bank_t rd0_bank, rd1_bank, wr_bank;
  dim_t rd0_idx, rd1_idx, wr_idx;
  data_t rd0_data [R]; data_t rd1_data [R]; data_t wr_data [R];
  logic wr_en; logic [R-1:0] wr_mask;
  int checks = 0, failures = 0;
  data_t shadow [NBANK][D][R];

  feature_buffer #(.ROWS(R), .DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_reads();
    for (int r = 0; r < R; r++) begin
      checks += 2;
      if (rd0_data[r] != ((rd0_bank < NBANK && rd0_idx < D) ? shadow[rd0_bank][rd0_idx][r] : data_t'(0))) begin
        failures++; $display("FAIL port0 bank %0d idx %0d row %0d", rd0_bank, rd0_idx, r);
      end
      if (rd1_data[r] != ((rd1_bank < NBANK && rd1_idx < D) ? shadow[rd1_bank][rd1_idx][r] : data_t'(0))) begin
        failures++; $display("FAIL port1 bank %0d idx %0d row %0d", rd1_bank, rd1_idx, r);
      end
    end
  endtask

  initial begin
    wr_en = 0; wr_mask = '0; rd0_bank = 0; rd1_bank = 0; rd0_idx = 0; rd1_idx = 0;
    foreach (wr_data[r]) wr_data[r] = 0;
    for (int b = 0; b < NBANK; b++)
      for (int d = 0; d < D; d++) begin
        @(negedge clk);
        wr_en = 1; wr_bank = bank_t'(b); wr_idx = dim_t'(d); wr_mask = '1;
        for (int r = 0; r < R; r++) begin wr_data[r] = data_t'($urandom); shadow[b][d][r] = wr_data[r]; end
      end
    @(negedge clk); wr_en = 0;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      rd0_bank = bank_t'($urandom % 4); rd0_idx = dim_t'($urandom % (D + 8));
      rd1_bank = bank_t'($urandom % NBANK); rd1_idx = dim_t'($urandom % D);
      #1 check_reads();
      wr_en = $urandom % 2; wr_bank = bank_t'($urandom % NBANK); wr_idx = dim_t'($urandom % D);
      wr_mask = R'($urandom);
      for (int r = 0; r < R; r++) wr_data[r] = data_t'($urandom);
      @(posedge clk);
      if (wr_en) for (int r = 0; r < R; r++) if (wr_mask[r]) shadow[wr_bank][wr_idx][r] = wr_data[r];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
