// tb_pe: self-checking test of one processing element. Feeds random dot
// products of random length (some back to back), checks the accumulator
// against a sum computed in the testbench, the one-cycle `done` pulse and the
// one-cycle forwarding of operands and flags.
module tb_pe;
  import gnn_pkg::*;

  logic clk = 0, rst_n = 0;
  data_t a_in, w_in, a_out, w_out;
  logic valid_in, first_in, last_in, valid_out, first_out, last_out, done;
  acc_t acc;
  int checks = 0, failures = 0;

  pe dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int len;
    longint exp;
    data_t pa, pw;
    a_in = 0; w_in = 0; valid_in = 0; first_in = 0; last_in = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      len = 1 + ($urandom % 20);
      exp = 0;
      for (int k = 0; k < len; k++) begin
        @(negedge clk);
        a_in = data_t'($urandom); w_in = data_t'($urandom);
        // an idle cycle in the middle must not disturb the sum
        valid_in = ($urandom % 5 != 0) || (k == 0) || (k == len - 1);
        if (!valid_in) begin k--; first_in = 0; last_in = 0; pa = a_in; pw = w_in; end
        else begin
          first_in = (k == 0); last_in = (k == len - 1);
          exp += longint'(a_in) * longint'(w_in);
          pa = a_in; pw = w_in;
        end
        @(posedge clk); #1;
        check(a_out == pa && w_out == pw, "operands forwarded");
        check(valid_out == valid_in, "valid forwarded");
        if (valid_in) check(done == last_in, "done pulse follows last");
      end
      check(acc == acc_t'(exp), $sformatf("dot product %0d vs %0d", acc, exp));
      @(negedge clk); valid_in = 0; first_in = 0; last_in = 0;
      @(posedge clk); #1;
      check(!done, "done is a single pulse");
      check(acc == acc_t'(exp), "accumulator holds when idle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
